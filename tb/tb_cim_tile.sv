// tb_cim_tile: self-checking testbench of the CIM tile at 8 rows x 4 columns.
//  1. ADC offsets: with no input, results before calibration show the static
//     offsets; after one calibration cycle they read 0.
//  2. K=1, sigma=0: every sample must equal floor(BL+/64) - floor(BL-/64)
//     worked out here from the programmed mu and x; y_valid follows each mvm by
//     one clock, one result per clock for back-to-back samples.
//  3. K=2 mixture (pi = 0.625/0.375), sigma=0: each sample must equal one of the
//     two all-first / all-second component results (one global r), with the
//     first chosen close to 10/16 of the time.
//  4. K=1, mu=0, sigma=15: GRNG noise must give a spread of results with a
//     mean near zero.
`timescale 1ns/1ps
module tb_cim_tile;
  import mog_pkg::*;
  localparam int NR = 8, NC = 4;
  logic clk = 0, rst_n = 0;
  logic w_we = 0, x_we = 0, seed_we = 0, mvm = 0, cal = 0, y_valid;
  logic [2:0] w_row = '0, x_row = '0;
  logic [1:0] w_col = '0;
  word_cfg_t w_cfg = '0;
  logic [3:0] x_val = '0;
  logic [11:0] seed = '0;
  logic [NC-1:0][7:0] y;
  int checks = 0, failures = 0;
  logic [7:0] mu_m [NR][NC];
  logic [3:0] x_m [NR];
  always #5 clk = ~clk;

  cim_tile #(.NROWS(NR), .NCOLS(NC)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic wword(input int r, input int c, input logic f, input logic [3:0] pc,
                       input logic [3:0] sg, input logic [7:0] mu);
    @(negedge clk);
    w_we = 1; w_row = 3'(r); w_col = 2'(c); w_cfg = '{f: f, pi_cum: pc, sigma: sg, mu: mu};
    mu_m[r][c] = mu;
    @(negedge clk); w_we = 0;
  endtask

  task automatic wx(input int r, input logic [3:0] v);
    @(negedge clk);
    x_we = 1; x_row = 3'(r); x_val = v; x_m[r] = v;
    @(negedge clk); x_we = 0;
  endtask

  // expected column result when component set 'sel' (row mask) is active, sigma=0
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

  task automatic sample(output logic [NC-1:0][7:0] res);
    @(negedge clk); mvm = 1;
    @(negedge clk); mvm = 0;
    check(y_valid == 1, "y_valid one clock after mvm");
    res = y;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NC-1:0][7:0] res;
    int nz, hits1, hits2, n;
    real sum, sum2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // --- 1. offsets and calibration (all inputs 0 after reset)
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 0, 8'd0);
    sample(res);
    nz = 0;
    for (int c = 0; c < NC; c++) nz += (res[c] != 0);
    check(nz > 0, "uncalibrated offsets visible");
    @(negedge clk); cal = 1;
    @(negedge clk); cal = 0;
    sample(res);
    for (int c = 0; c < NC; c++) check(res[c] == 0, $sformatf("calibrated zero col %0d = %0d", c, $signed(res[c])));
    // --- 2. K=1 deterministic
    for (int r = 0; r < NR; r++) begin
      wx(r, 4'($urandom_range(0, 3)));
      for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 0, 8'($urandom_range(0, 255)) & 8'h8F);
    end
    // back-to-back samples
    @(negedge clk); mvm = 1;
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      check(y_valid == 1, "one result per clock");
      for (int c = 0; c < NC; c++)
        check($signed(y[c]) == expect_y(c, '1), $sformatf("K=1 col %0d y %0d exp %0d", c, $signed(y[c]), expect_y(c, '1)));
    end
    mvm = 0;
    @(negedge clk);
    check(y_valid == 0, "no result without mvm");
    // --- 3. K=2 groups: even rows first component (cum 9), odd rows second (15)
    for (int r = 0; r < NR; r++) begin
      wx(r, 4'd2);
      for (int c = 0; c < NC; c++)
        wword(r, c, (r % 2 == 0), (r % 2 == 0) ? 4'd9 : 4'd15, 0,
              (r % 2 == 0) ? 8'(10 + c) : (8'h80 | 8'(5 + 2 * c)));
    end
    hits1 = 0; hits2 = 0; n = 400;
    for (int k = 0; k < n; k++) begin
      bit m1, m2;
      sample(res);
      m1 = 1; m2 = 1;
      for (int c = 0; c < NC; c++) begin
        m1 &= ($signed(res[c]) == expect_y(c, 8'b0101_0101));
        m2 &= ($signed(res[c]) == expect_y(c, 8'b1010_1010));
      end
      check(m1 || m2, "K=2 sample is one whole component set");
      hits1 += m1; hits2 += m2;
    end
    $display("K=2: first component %0d / %0d", hits1, n);
    check(hits1 + hits2 == n, "every sample classified");
    check(hits1 > n * 0.55 && hits1 < n * 0.70, $sformatf("mixing ratio 0.625: %0d/%0d", hits1, n));
    // --- 4. GRNG noise, K=1, mu=0, sigma=15, x=1
    for (int r = 0; r < NR; r++) begin
      wx(r, 4'd1);
      for (int c = 0; c < NC; c++) wword(r, c, 1, 15, 4'd15, 8'd0);
    end
    sum = 0; sum2 = 0; nz = 0;
    for (int k = 0; k < 400; k++) begin
      sample(res);
      for (int c = 0; c < NC; c++) begin
        sum += $signed(res[c]); sum2 += $signed(res[c]) * $signed(res[c]);
        nz += (res[c] != 0);
      end
    end
    sum = sum / (400.0 * NC);
    sum2 = sum2 / (400.0 * NC) - sum * sum;
    $display("GRNG-only results: mean %f variance %f", sum, sum2);
    check(nz > 200, "GRNG noise reaches the output");
    check(sum > -1.0 && sum < 1.0, "zero-mean noise");
    check(sum2 > 0.5, "nonzero variance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
