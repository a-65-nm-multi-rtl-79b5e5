// tb_fc3_workload: the last fully connected layer of a skin-lesion classifier
// (64 inputs -> 7 classes, three-component mixture weights, 20 samples per
// input) run on the engine at its full default size by tile reuse.
// The testbench plays the part of the host core: a three-component weight
// takes three rows, so a column holds 21 weights and the 64 inputs are split
// into four tile loads of 21, 21, 21 and 1 inputs. Each class is one column
// (column 7 is unused). For every load the core writes the words, the
// inputs and the LFSR seed, runs 20 samples and adds the partial sums of each
// sample. Every weight has its own mixing ratios.
// Checks:
//   - each partial result equals the value worked out here from an
//     independent model of the LFSR (x^12+x^6+x^4+x+1, four shifts per
//     sample, r = low four bits), the cumulative-code selection rule and the
//     truncating 64-unit ADC step;
//   - each run of 20 samples takes 22 clocks;
//   - the per-class sums over all loads, their sample mean and variance, and
//     the arg-max class of each sample match the reference;
//   - every component position is drawn at least once.
// A second part sweeps the mixture order over K = 1, 2, 4, 8 and 16 on the
// same full-size engine: floor(64/K) groups per column with equal mixing
// ratios (codes (k+1)*16/K - 1), one run of 20 samples per K. Its reference
// works row by row: in each group (a row with F = 1 starts one) the first row
// whose code is not below r is the drawn one. Each result must match, and for
// K > 1 more than one component position must be drawn.
// sigma is 0 here so the expected values are exact (the Gaussian term is
// checked by the block and top testbenches), and inputs and means are kept
// small (x <= 3, |mu| <= 7) so that no bitline exceeds the 6-bit ADC range.
`timescale 1ns/1ps
module tb_fc3_workload;
  import mog_pkg::*;
  localparam int NIN = 64, NOUT = 7, K = 3, R = 20;
  localparam int GPC = ROWS / K;                  // weights per column: 21
  localparam int NLOAD = (NIN + GPC - 1) / GPC;   // tile loads: 4
  localparam int ksweep [5] = '{1, 2, 4, 8, 16};
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic bus_rvalid, done_irq;
  int checks = 0, failures = 0;
  // layer: mixture weight (input i, class o, component k)
  logic [7:0] mu_w [NIN][NOUT][K];
  logic [3:0] code_w [NIN][NOUT][K];
  logic [3:0] x_in [NIN];
  int acc [R][NOUT], ref_acc [R][NOUT];
  int drawn [K];
  // row-level image of the tile for the K sweep
  logic       rw_f [ROWS];
  logic [3:0] rw_code [ROWS][COLS];
  logic [7:0] rw_mu [ROWS][COLS];
  logic [3:0] rw_x [ROWS];
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

  function automatic logic [11:0] lfsr_next(input logic [11:0] s);
    logic [11:0] t;
    t = s;
    repeat (4) t = {t[10:0], t[11] ^ t[5] ^ t[3] ^ t[0]};
    return t;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [11:0] st;
    int t0, clocks;
    // random layer with per-weight mixing ratios
    for (int i = 0; i < NIN; i++) begin
      x_in[i] = 4'($urandom_range(0, 3));
      for (int o = 0; o < NOUT; o++) begin
        int c0, c1;
        c0 = $urandom_range(0, 13);
        c1 = $urandom_range(c0 + 1, 14);
        code_w[i][o][0] = 4'(c0);
        code_w[i][o][1] = 4'(c1);
        code_w[i][o][2] = 4'd15;
        for (int k = 0; k < K; k++)
          mu_w[i][o][k] = {1'($urandom_range(0, 1)), 7'($urandom_range(0, 7))};
      end
    end
    foreach (acc[s, o]) begin acc[s][o] = 0; ref_acc[s][o] = 0; end
    foreach (drawn[k]) drawn[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ADC offset calibration once
    wr(A_CTRL, 32'd2);
    while (!done_irq) @(negedge clk);

    for (int ld = 0; ld < NLOAD; ld++) begin
      int base;
      logic [11:0] seed;
      base = ld * GPC;
      seed = 12'(16'h2A7 + ld * 16'h135);
      // program the tile: group g of a column holds weight (base+g, column)
      for (int row = 0; row < ROWS; row++) begin
        int g, k, i;
        g = row / K; k = row % K; i = base + g;
        wr(A_X + 16'(row), (g < GPC && i < NIN) ? 32'(x_in[i]) : 32'd0);
        for (int c = 0; c < COLS; c++) begin
          word_cfg_t w;
          if (g < GPC && i < NIN && c < NOUT)
            w = '{f: k == 0, pi_cum: code_w[i][c][k], sigma: 4'd0, mu: mu_w[i][c][k]};
          else
            w = '{f: k == 0, pi_cum: (k == K - 1) ? 4'd15 : 4'(k * 5 + 4), sigma: 4'd0, mu: 8'd0};
          wr(A_WORD + 16'(row * COLS + c), 32'(w));
        end
      end
      wr(A_SEED, 32'(seed));
      wr(A_CTRL, 32'(R << 8) | 32'd1);
      t0 = int'($time);
      while (!done_irq) @(negedge clk);
      clocks = (int'($time) - t0) / 10;
      check(clocks == R + 2, $sformatf("load %0d: run of %0d samples took %0d clocks", ld, R, clocks));
      // reference partial sums for this load
      st = seed;
      for (int s = 0; s < R; s++) begin
        for (int o = 0; o < NOUT; o++) begin
          int p, n;
          p = 0; n = 0;
          for (int g = 0; g < GPC && base + g < NIN; g++) begin
            int i, ksel, t;
            i = base + g;
            ksel = K - 1;
            for (int k = K - 1; k >= 0; k--) if (st[3:0] <= code_w[i][o][k]) ksel = k;
            if (o == 0) drawn[ksel]++;
            t = int'(x_in[i]) * int'(mu_w[i][o][ksel][6:0]) * MU_UNIT;
            if (mu_w[i][o][ksel][7]) n += t; else p += t;
          end
          rd(A_RES + 16'(s * COLS + o), d);
          check($signed(d) == p / 64 - n / 64,
                $sformatf("load %0d sample %0d class %0d: %0d expected %0d", ld, s, o,
                          $signed(d), p / 64 - n / 64));
          acc[s][o] += $signed(d);
          ref_acc[s][o] += p / 64 - n / 64;
        end
        st = lfsr_next(st);
      end
    end

    // the core's uncertainty statistics over the R samples
    for (int o = 0; o < NOUT; o++) begin
      real m, v, rm, rv;
      m = 0; v = 0; rm = 0; rv = 0;
      for (int s = 0; s < R; s++) begin
        m += acc[s][o]; v += real'(acc[s][o]) * real'(acc[s][o]);
        rm += ref_acc[s][o]; rv += real'(ref_acc[s][o]) * real'(ref_acc[s][o]);
      end
      m /= R; v = v / R - m * m; rm /= R; rv = rv / R - rm * rm;
      $display("class %0d: mean %7.2f variance %7.2f", o, m, v);
      check(m == rm && v == rv, $sformatf("class %0d statistics", o));
    end
    for (int s = 0; s < R; s++) begin
      int best, rbest;
      best = 0; rbest = 0;
      for (int o = 1; o < NOUT; o++) begin
        if (acc[s][o] > acc[s][best]) best = o;
        if (ref_acc[s][o] > ref_acc[s][rbest]) rbest = o;
      end
      check(best == rbest, $sformatf("sample %0d predicted class", s));
    end
    $display("component draws (class 0): %0d %0d %0d", drawn[0], drawn[1], drawn[2]);
    for (int k = 0; k < K; k++) check(drawn[k] > 0, $sformatf("component %0d drawn", k));

    // ---- mixture-order sweep
    foreach (ksweep[kk]) begin
      int kn, ng, npos;
      logic [11:0] seed;
      bit pos_seen [16];
      kn = ksweep[kk];
      ng = ROWS / kn;
      seed = 12'(16'h5B1 + kk * 16'h2F);
      foreach (pos_seen[k]) pos_seen[k] = 0;
      for (int row = 0; row < ROWS; row++) begin
        bit used;
        int k;
        used = row < ng * kn;
        k = used ? row % kn : 0;
        rw_f[row] = (k == 0);
        rw_x[row] = used ? 4'($urandom_range(0, 1)) : 4'd0;
        wr(A_X + 16'(row), 32'(rw_x[row]));
        for (int c = 0; c < COLS; c++) begin
          word_cfg_t w;
          rw_code[row][c] = used ? 4'((k + 1) * 16 / kn - 1) : 4'd15;
          rw_mu[row][c] = used ? {1'($urandom_range(0, 1)), 7'($urandom_range(0, 7))} : 8'd0;
          w = '{f: rw_f[row], pi_cum: rw_code[row][c], sigma: 4'd0, mu: rw_mu[row][c]};
          wr(A_WORD + 16'(row * COLS + c), 32'(w));
        end
      end
      wr(A_SEED, 32'(seed));
      wr(A_CTRL, 32'(R << 8) | 32'd1);
      t0 = int'($time);
      while (!done_irq) @(negedge clk);
      clocks = (int'($time) - t0) / 10;
      check(clocks == R + 2, $sformatf("K=%0d: run took %0d clocks", kn, clocks));
      st = seed;
      for (int s = 0; s < R; s++) begin
        for (int c = 0; c < COLS; c++) begin
          int p, n, pos;
          bit taken;
          p = 0; n = 0; taken = 0; pos = 0;
          for (int row = 0; row < ROWS; row++) begin
            if (rw_f[row]) begin taken = 0; pos = 0; end else pos++;
            if (!taken && st[3:0] <= rw_code[row][c]) begin
              int t;
              taken = 1;
              if (c == 0 && row < ng * kn) pos_seen[pos] = 1;
              t = int'(rw_x[row]) * int'(rw_mu[row][c][6:0]) * MU_UNIT;
              if (rw_mu[row][c][7]) n += t; else p += t;
            end
          end
          rd(A_RES + 16'(s * COLS + c), d);
          check($signed(d) == p / 64 - n / 64,
                $sformatf("K=%0d sample %0d column %0d: %0d expected %0d", kn, s, c,
                          $signed(d), p / 64 - n / 64));
        end
        st = lfsr_next(st);
      end
      npos = 0;
      foreach (pos_seen[k]) npos += int'(pos_seen[k]);
      $display("K=%0d: %0d groups per column, %0d component positions drawn in %0d samples",
               kn, ng, npos, R);
      check(kn == 1 ? npos == 1 : npos > 1, $sformatf("K=%0d positions drawn", kn));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
