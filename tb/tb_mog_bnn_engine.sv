// tb_mog_bnn_engine: end-to-end testbench of the engine at its full size
// (64 x 8 words, R_MAX = 32), driven only through the core's register bus.
// Sequence and checks:
//   - calibration run, then a zero-input sample must read 0 in every column;
//   - K=1, sigma=0: a run of R=20 samples; every result must equal the value
//     worked out here from the programmed mu and x (BL+/64 - BL-/64) and the
//     run must take R+2 clocks (one sample per clock);
//   - mode switch to K=3 mixtures (21 groups per column, pi = 5/16, 6/16,
//     5/16): every sample must equal one of the three component results and
//     each component must be drawn at about its ratio over 5 runs;
//   - GRNG noise (mu=0, sigma=15): spread with near-zero mean;
//   - LFSR seed load: the same seed twice gives the same sample sequence;
//   - R above R_MAX is clamped, a write during a run is refused (error bit).
// Every mechanism is counted and must occur at least once.
`timescale 1ns/1ps
module tb_mog_bnn_engine;
  import mog_pkg::*;
  localparam int NR = ROWS, NC = COLS;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic bus_rvalid, done_irq;
  int checks = 0, failures = 0;
  int n_cal = 0, n_k1 = 0, n_k3 = 0, n_noise = 0, n_seed = 0, n_clamp = 0, n_refused = 0;
  logic [7:0] mu_m [NR][NC];
  logic [3:0] x_m [NR];
  always #5 clk = ~clk;

  mog_bnn_engine dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 0; bus_addr = a;
    @(negedge clk);
    bus_valid = 0;
    d = bus_rdata;
  endtask

  task automatic wword(input int r, input int c, input logic f, input logic [3:0] pc,
                       input logic [3:0] sg, input logic [7:0] mu);
    word_cfg_t w;
    w = '{f: f, pi_cum: pc, sigma: sg, mu: mu};
    mu_m[r][c] = mu;
    wr(A_WORD + 16'(r * NC + c), 32'(w));
  endtask

  task automatic wx(input int r, input logic [3:0] v);
    x_m[r] = v;
    wr(A_X + 16'(r), 32'(v));
  endtask

  // run R samples, return the clocks from start to done
  task automatic run(input int r, output int clocks);
    int t0;
    wr(A_CTRL, 32'(r << 8) | 32'd1);
    t0 = $time;
    while (!done_irq) @(negedge clk);
    clocks = ($time - t0) / 10;
  endtask

  function automatic int expect_y(input int c, input logic [NR-1:0] rows);
    int p, n;
    p = 0; n = 0;
    for (int r = 0; r < NR; r++) if (rows[r]) begin
      int t;
      t = int'(x_m[r]) * int'(mu_m[r][c][6:0]) * 8;
      if (mu_m[r][c][7]) n += t; else p += t;
    end
    return p / 64 - n / 64;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int clocks, hits [3];
    logic [NR-1:0] comp_rows [3];
    int seq1 [8], seq2 [8];
    real sum, sum2;
    int nz;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- calibration
    for (int r = 0; r < NR; r++) wx(r, 4'd0);
    wr(A_CTRL, 32'd2);
    while (!done_irq) @(negedge clk);
    n_cal++;
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 0, 8'h00);
    run(1, clocks);
    for (int c = 0; c < NC; c++) begin
      rd(A_RES + 16'(c), d);
      check(d == 0, $sformatf("calibrated zero col %0d = %0d", c, $signed(d)));
    end
    // ---- K=1 deterministic
    for (int r = 0; r < NR; r++) begin
      wx(r, 4'($urandom_range(0, 1)));
      for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 0, 8'($urandom) & 8'h87);
    end
    run(20, clocks);
    check(clocks == 22, $sformatf("R=20 run took %0d clocks", clocks));
    for (int s = 0; s < 20; s++) for (int c = 0; c < NC; c++) begin
      rd(A_RES + 16'(s * NC + c), d);
      check($signed(d) == expect_y(c, '1), $sformatf("K=1 s%0d c%0d: %0d exp %0d", s, c, $signed(d), expect_y(c, '1)));
    end
    n_k1++;
    // ---- write refused while busy, R clamp
    wr(A_CTRL, 32'(100 << 8) | 32'd1);
    wr(A_WORD, 32'h0);
    while (!done_irq) @(negedge clk);
    rd(A_CTRL, d);
    check(d[2] == 1, "error bit after refused write");
    check(d[15:8] == 8'd32, "R clamped to 32");
    if (d[2]) n_refused++;
    if (d[15:8] == 8'd32) n_clamp++;
    rd(A_RES + 16'(31 * NC), d);
    check($signed(d) == expect_y(0, '1), "word 0 unchanged by refused write");
    // ---- mode switch: K=3 groups of rows {3g, 3g+1, 3g+2}, row 63 alone with mu=0
    foreach (comp_rows[k]) comp_rows[k] = '0;
    for (int r = 0; r < NR; r++) begin
      wx(r, (r < 63) ? 4'd1 : 4'd0);
      for (int c = 0; c < NC; c++) begin
        if (r == 63) wword(r, c, 1, 15, 0, 8'h00);
        else begin
          int k;
          k = r % 3;
          wword(r, c, k == 0, (k == 0) ? 4'd4 : (k == 1) ? 4'd10 : 4'd15, 0,
                (k == 0) ? 8'(1 + c % 2) : (k == 1) ? 8'h80 | 8'(2 + c % 3) : 8'(4 + c % 4));
        end
      end
      if (r < 63) comp_rows[r % 3][r] = 1'b1;
    end
    foreach (hits[k]) hits[k] = 0;
    for (int run_i = 0; run_i < 5; run_i++) begin
      run(20, clocks);
      for (int s = 0; s < 20; s++) begin
        bit m [3];
        foreach (m[k]) m[k] = 1;
        for (int c = 0; c < NC; c++) begin
          rd(A_RES + 16'(s * NC + c), d);
          for (int k = 0; k < 3; k++) m[k] &= ($signed(d) == expect_y(c, comp_rows[k]));
        end
        check(m[0] || m[1] || m[2], "K=3 sample is one component");
        for (int k = 0; k < 3; k++) if (m[k]) begin hits[k]++; break; end
      end
    end
    $display("K=3 component draws: %0d %0d %0d of 100", hits[0], hits[1], hits[2]);
    check(hits[0] >= 17 && hits[0] <= 46, "pi_1 = 5/16");
    check(hits[1] >= 22 && hits[1] <= 53, "pi_2 = 6/16");
    check(hits[2] >= 17 && hits[2] <= 46, "pi_3 = 5/16");
    check(hits[0] + hits[1] + hits[2] == 100, "all draws classified");
    n_k3++;
    // ---- GRNG noise and seed repeatability
    for (int r = 0; r < NR; r++) begin
      wx(r, 4'd1);
      for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 4'd15, 8'h00);
    end
    for (int rep = 0; rep < 2; rep++) begin
      wr(A_SEED, 32'h3C5);
      run(8, clocks);
      for (int s = 0; s < 8; s++) begin
        rd(A_RES + 16'(s * NC), d);
        if (rep == 0) seq1[s] = $signed(d); else seq2[s] = $signed(d);
      end
    end
    check(seq1 == seq2, "same seed, same samples");
    n_seed++;
    sum = 0; sum2 = 0; nz = 0;
    run(32, clocks);
    for (int s = 0; s < 32; s++) for (int c = 0; c < NC; c++) begin
      rd(A_RES + 16'(s * NC + c), d);
      sum += $signed(d); sum2 += real'($signed(d)) * real'($signed(d)); nz += (d != 0);
    end
    sum = sum / 256.0; sum2 = sum2 / 256.0 - sum * sum;
    $display("GRNG noise at the outputs: mean %f variance %f", sum, sum2);
    check(sum > -6.0 && sum < 6.0, "noise mean near zero");
    check(sum2 > 4.0, "noise variance");
    check(nz > 128, "noise present");
    n_noise++;
    // ---- every mechanism exercised
    check(n_cal > 0, "calibration exercised");
    check(n_k1 > 0, "K=1 exercised");
    check(n_k3 > 0, "K=3 mode switch exercised");
    check(n_noise > 0, "GRNG sampling exercised");
    check(n_seed > 0, "seed load exercised");
    check(n_clamp > 0, "R clamp exercised");
    check(n_refused > 0, "busy refusal exercised");
    $display("mechanisms: cal=%0d K1=%0d K3=%0d noise=%0d seed=%0d clamp=%0d refused=%0d",
             n_cal, n_k1, n_k3, n_noise, n_seed, n_clamp, n_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
