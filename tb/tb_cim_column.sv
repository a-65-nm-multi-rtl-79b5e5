// tb_cim_column: self-checking testbench of the column model. Random words
// (sign-magnitude mu, sigma), inputs, word enables and GRNG samples are
// applied; both bitline values are compared with the sum worked out here:
// x*|mu|*8 to the side of mu's sign and x*sigma*|eps| to the side of eps's sign,
// for enabled words only.
`timescale 1ns/1ps
module tb_cim_column;
  import mog_pkg::*;
  localparam int N = 16;
  logic clk = 0, we = 0;
  logic [3:0] waddr = '0;
  logic [7:0] wmu = '0;
  logic [3:0] wsig = '0;
  logic [N-1:0][3:0] x;
  logic [N-1:0] alpha;
  logic [N-1:0][7:0] eps;
  logic [31:0] bl_pos, bl_neg;
  logic [7:0] mu_m [N];
  logic [3:0] sg_m [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cim_column #(.NROWS(N)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i); wmu = 8'($urandom); wsig = 4'($urandom);
      mu_m[i] = wmu; sg_m[i] = wsig;
    end
    @(negedge clk); we = 0;
    repeat (200) begin
      longint ep, en;
      for (int i = 0; i < N; i++) begin
        x[i] = 4'($urandom); alpha[i] = 1'($urandom); eps[i] = 8'($urandom_range(0, 60)) - 8'd30;
      end
      #1;
      ep = 0; en = 0;
      for (int i = 0; i < N; i++) if (alpha[i]) begin
        int m, e;
        m = int'(mu_m[i][6:0]) * 8 * int'(x[i]);
        if (mu_m[i][7]) en += m; else ep += m;
        e = $signed(eps[i]);
        if (e < 0) en += -e * int'(sg_m[i]) * int'(x[i]);
        else       ep +=  e * int'(sg_m[i]) * int'(x[i]);
      end
      check(bl_pos == 32'(ep), $sformatf("BL+ %0d exp %0d", bl_pos, ep));
      check(bl_neg == 32'(en), $sformatf("BL- %0d exp %0d", bl_neg, en));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
