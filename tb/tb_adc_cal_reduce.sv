// tb_adc_cal_reduce: self-checking testbench of the calibration and
// reduction stage. Random offsets are captured in a calibration cycle, then
// random code pairs must give (pos - off_pos) - (neg - off_neg) one clock
// after conv, with y_valid only then.
`timescale 1ns/1ps
module tb_adc_cal_reduce;
  import mog_pkg::*;
  localparam int C = 8;
  logic clk = 0, rst_n = 0, cal = 0, conv = 0, y_valid;
  logic [C-1:0][5:0] code_pos, code_neg, op, on;
  logic [C-1:0][7:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  adc_cal_reduce dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < C; c++) begin op[c] = 6'($urandom_range(0, 5)); on[c] = 6'($urandom_range(0, 5)); end
    code_pos = op; code_neg = on; cal = 1;
    @(negedge clk); cal = 0;
    check(y_valid == 0, "no valid after cal");
    repeat (300) begin
      for (int c = 0; c < C; c++) begin code_pos[c] = 6'($urandom); code_neg[c] = 6'($urandom); end
      conv = 1;
      @(negedge clk);
      conv = 0;
      check(y_valid == 1, "valid one clock after conv");
      for (int c = 0; c < C; c++) begin
        int e;
        e = (int'(code_pos[c]) - int'(op[c])) - (int'(code_neg[c]) - int'(on[c]));
        check($signed(y[c]) == e, $sformatf("col %0d y %0d exp %0d", c, $signed(y[c]), e));
      end
      @(negedge clk);
      check(y_valid == 0, "valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
