// tb_input_buffer: self-checking testbench of the input buffer. Checks reset
// to zero, random writes read back on every row, and that gate=0 turns all
// rows off without losing the contents.
`timescale 1ns/1ps
module tb_input_buffer;
  import mog_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, gate = 1;
  logic [5:0] waddr = '0;
  logic [3:0] wdata = '0;
  logic [63:0][3:0] x;
  logic [3:0] model [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  input_buffer dut (.*);

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
    check(x == '0, "reset");
    foreach (model[i]) model[i] = 0;
    repeat (300) begin
      we = 1; waddr = 6'($urandom_range(0, 63)); wdata = 4'($urandom);
      model[waddr] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 64; i++) check(x[i] == model[i], $sformatf("row %0d", i));
    gate = 0; #1;
    check(x == '0, "gated off");
    gate = 1; #1;
    for (int i = 0; i < 64; i++) check(x[i] == model[i], "kept while gated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
