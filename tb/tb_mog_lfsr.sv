// tb_mog_lfsr: self-checking testbench of the global LFSR.
// Compares every state with an independent bit-serial model of the same
// polynomial, checks the period (4095 samples), that r is near uniform (each
// 4-bit value 255 or 256 times per period), hold when adv=0, and seed loading
// including the zero-seed guard.
`timescale 1ns/1ps
module tb_mog_lfsr;
  import mog_pkg::*;
  logic clk = 0, rst_n = 0, adv = 0, seed_we = 0;
  logic [11:0] seed = '0, state;
  logic [3:0]  r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mog_lfsr dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // independent model: 12-bit Galois-free bit-serial shift with taps 12,6,4,1
  function automatic logic [11:0] ref_step(input logic [11:0] s);
    logic fb;
    fb = s[11] ^ s[5] ^ s[3] ^ s[0];
    return (s << 1) | 12'(fb);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] m, s0;
    int hist [16];
    int period;
    foreach (hist[i]) hist[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 12'hACE, "reset seed");
    m = state; s0 = state; period = 0;
    // hold
    repeat (3) @(negedge clk);
    check(state == s0, "hold without adv");
    adv = 1;
    for (int i = 0; i < 4095; i++) begin
      hist[r]++;
      @(negedge clk);
      for (int k = 0; k < 4; k++) m = ref_step(m);
      check(state == m, $sformatf("step %0d state %h exp %h", i, state, m));
      check(state != 0, "nonzero");
      if (period == 0 && state == s0) period = i + 1;
    end
    adv = 0;
    check(period == 4095, $sformatf("period %0d", period));
    foreach (hist[i]) check(hist[i] == 256 || hist[i] == 255, $sformatf("hist[%0d]=%0d", i, hist[i]));
    seed_we = 1; seed = 12'h123;
    @(negedge clk);
    check(state == 12'h123, "seed load");
    seed = 12'h000;
    @(negedge clk);
    check(state == 12'h001, "zero seed guard");
    seed_we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
