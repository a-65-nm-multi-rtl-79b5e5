// tb_tile_controller: self-checking testbench of the register controller with
// a stand-in tile that answers every mvm one clock later with a known pattern.
// Checks: word/input/seed writes reach the tile with the right row, column and
// fields; a run of R samples issues exactly R mvm pulses on consecutive clocks
// and finishes R+2 clocks after the start write; all R x NCOLS results read
// back; R is clamped to R_MAX; a calibration is one cal clock; writes during a
// run are refused and set the error bit.
`timescale 1ns/1ps
module tb_tile_controller;
  import mog_pkg::*;
  localparam int NR = 64, NC = 8, RM = 32;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic bus_rvalid, done_irq;
  logic w_we, x_we, seed_we, mvm, cal;
  logic [5:0] w_row, x_row;
  logic [2:0] w_col;
  word_cfg_t w_cfg;
  logic [3:0] x_val;
  logic [11:0] seed;
  logic [NC-1:0][7:0] y;
  logic y_valid;
  int checks = 0, failures = 0;
  int mvm_cnt = 0, smp = 0;
  always #5 clk = ~clk;

  tile_controller #(.NROWS(NR), .NCOLS(NC), .R_MAX(RM)) dut (.*);

  // stand-in tile: result of sample s, column c is (s*7 + c*3 - 20)
  always_ff @(posedge clk) begin
    y_valid <= mvm;
    if (mvm) begin
      for (int c = 0; c < NC; c++) y[c] <= 8'(smp * 7 + c * 3 - 20);
      smp <= smp + 1;
      mvm_cnt <= mvm_cnt + 1;
    end
  end

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
    check(bus_rvalid == 1, "rvalid");
    d = bus_rdata;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int t0, t1, r;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // word write decoding
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = A_WORD + 16'(37 * NC + 5);
    bus_wdata = 32'({1'b0, 4'd9, 4'd3, 8'h85});
    #1;
    check(w_we && w_row == 37 && w_col == 5, "word address");
    check(w_cfg.mu == 8'h85 && w_cfg.sigma == 3 && w_cfg.pi_cum == 9 && !w_cfg.f, "word fields");
    bus_addr = A_X + 16'd63; bus_wdata = 32'd11; #1;
    check(x_we && x_row == 63 && x_val == 11 && !w_we, "input write");
    bus_addr = A_SEED; bus_wdata = 32'h5A5; #1;
    check(seed_we && seed == 12'h5A5, "seed write");
    @(negedge clk); bus_valid = 0; bus_we = 0;
    // run R = 20
    for (int pass = 0; pass < 2; pass++) begin
      r = pass == 0 ? 20 : 3;
      mvm_cnt = 0; smp = 0;
      wr(A_CTRL, 32'(r << 8) | 32'd1);
      t0 = $time;  // half a clock after the edge that took the start write
      // refused write while busy
      if (pass == 0) begin
        @(negedge clk);
        bus_valid = 1; bus_we = 1; bus_addr = A_WORD; bus_wdata = 0; #1;
        check(!w_we, "write refused while busy");
        @(negedge clk); bus_valid = 0; bus_we = 0;
      end
      while (!done_irq) @(negedge clk);
      t1 = $time;
      check(mvm_cnt == r, $sformatf("mvm pulses %0d", mvm_cnt));
      check((t1 - t0) / 10 == r + 2, $sformatf("run took %0d clocks", (t1 - t0) / 10));
      rd(A_CTRL, d);
      check(d[0] == 0 && d[1] == 1 && d[15:8] == 8'(r), "status after run");
      check(d[2] == (pass == 0 || 1), "error bit sticky");
      for (int s = 0; s < r; s++)
        for (int c = 0; c < NC; c++) begin
          rd(A_RES + 16'(s * NC + c), d);
          check($signed(d) == 32'($signed(8'(s * 7 + c * 3 - 20))), $sformatf("result s%0d c%0d = %0d", s, c, $signed(d)));
        end
    end
    // R clamp
    mvm_cnt = 0; smp = 0;
    wr(A_CTRL, 32'(200 << 8) | 32'd1);
    while (!done_irq) @(negedge clk);
    check(mvm_cnt == RM, "R clamped to R_MAX");
    // calibration: one cal clock, no mvm
    mvm_cnt = 0;
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = A_CTRL; bus_wdata = 32'd2;
    @(negedge clk); bus_valid = 0; bus_we = 0;
    check(cal == 1 && mvm == 0, "cal clock");
    @(negedge clk);
    check(cal == 0, "cal is one clock");
    check(mvm_cnt == 0, "no mvm in cal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
