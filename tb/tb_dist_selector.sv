// tb_dist_selector: self-checking testbench of the in-word distribution
// selector. A column of six selectors is configured as one K=1 word, one K=2
// group and one K=3 group. For all 16 values of r the outputs are compared
// with the selection rule computed here (component i of a group is chosen
// when c_(i-1) < r <= c_i), and exactly one alpha per group must be 1. The
// selection frequencies over all r must equal the stored ratios.
`timescale 1ns/1ps
module tb_dist_selector;
  import mog_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] cfg_we = '0, b, alpha, b_prev;
  logic [3:0] cfg_pi = '0, r = '0;
  logic cfg_f = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g
    dist_selector u (.clk, .rst_n, .cfg_we(cfg_we[i]), .cfg_pi, .cfg_f, .r,
                     .b_prev(b_prev[i]), .b(b[i]), .alpha(alpha[i]));
    if (i == 0) assign b_prev[i] = 1'b0;
    else        assign b_prev[i] = b[i-1];
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // group layout: word0 K=1; words1-2 K=2 (pi .625/.375); words3-5 K=3
  int cum [N] = '{15, 9, 15, 4, 10, 15};
  bit fl  [N] = '{1, 1, 0, 1, 0, 0};
  int gstart [N] = '{0, 1, 1, 3, 3, 3};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [N];
    foreach (cnt[i]) cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // after reset every word is its own group and always selected
    @(negedge clk);
    for (int v = 0; v < 16; v += 5) begin r = 4'(v); #1; check(alpha == '1, "reset: all selected"); end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cfg_we = N'(1) << i; cfg_pi = 4'(cum[i]); cfg_f = fl[i];
    end
    @(negedge clk); cfg_we = '0;
    for (int v = 0; v < 16; v++) begin
      r = 4'(v); #1;
      for (int i = 0; i < N; i++) begin
        int lo;
        bit exp_a;
        lo = (i == gstart[i]) ? -1 : cum[i-1];
        exp_a = (v > lo) && (v <= cum[i]);
        check(alpha[i] == exp_a, $sformatf("r=%0d word %0d alpha=%0b exp %0b", v, i, alpha[i], exp_a));
        check(b[i] == (v <= cum[i]), "b");
        cnt[i] += alpha[i];
      end
      check(alpha[0] == 1'b1, "K=1 always");
      check($countones(alpha[2:1]) == 1, "K=2 one-hot");
      check($countones(alpha[5:3]) == 1, "K=3 one-hot");
    end
    // frequencies: (c_i - c_(i-1)) out of 16
    check(cnt[1] == 10 && cnt[2] == 6, $sformatf("K=2 counts %0d %0d", cnt[1], cnt[2]));
    check(cnt[3] == 5 && cnt[4] == 6 && cnt[5] == 5, "K=3 counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
