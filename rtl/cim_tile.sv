// cim_tile: the Mixture-of-Gaussian Bayesian compute-in-memory tile.
//
// NROWS x NCOLS words (64 x 8 by default). Each word holds one Gaussian
// component (mu, sigma) of a weight plus a distribution selector; a weight
// with K components takes K adjacent rows of one column, grouped by the
// selectors' F flags, so a column holds floor(64/K) weights. One sample
// iteration (mvm=1) is one matrix-vector multiplication with a freshly drawn
// weight set:
//   1. the global LFSR's r picks one component per group (alpha, one-hot per
//      group) and its other bits pick one device pair in every GRNG cell;
//   2. every GRNG cell yields a charge-cycle and a discharge-cycle sample,
//      sent to the two horizontally adjacent words it serves (columns 2c, 2c+1);
//   3. each enabled word discharges its column's BL+/BL- by x*(mu + sigma*eps);
//   4. two 6-bit ADCs per column digitize BL+ and BL-, and the calibration /
//      reduction stage outputs y[c] = signed difference minus the offsets.
// The LFSR then advances, so the next sample is independent. A calibration
// cycle (cal=1) turns all wordlines off and stores each ADC's offset.
// Structure (selectors, shared LFSR, in-word GRNG shared by two words, ADC per
// bitline) follows the source design; GRNG pairing, LFSR bit fields, ADC
// offsets and result format are this design's choices.
// Timing: one sample per clock, fully pipelined: y/y_valid appear the clock
// after mvm. Configuration writes take one clock each. mvm and cal must not be
// high together.
module cim_tile
  import mog_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // word programming
  input  logic                               w_we,
  input  logic [$clog2(NROWS)-1:0]           w_row,
  input  logic [$clog2(NCOLS)-1:0]           w_col,
  input  word_cfg_t                          w_cfg,
  // input buffer
  input  logic                               x_we,
  input  logic [$clog2(NROWS)-1:0]           x_row,
  input  logic [X_W-1:0]                     x_val,
  // LFSR seed
  input  logic                               seed_we,
  input  logic [LFSR_W-1:0]                  seed,
  // operation
  input  logic                               mvm,
  input  logic                               cal,
  output logic [NCOLS-1:0][Y_W-1:0]          y,
  output logic                               y_valid
);

  localparam int HCOLS = NCOLS / 2;

  logic [LFSR_W-1:0]            lfsr_state;
  logic [PI_W-1:0]              r;
  grng_sel_t                    gsel;
  logic [NROWS-1:0][X_W-1:0]    x;
  logic [NROWS-1:0][NCOLS-1:0]  b, alpha;
  logic [NCOLS-1:0][NROWS-1:0]  alpha_col;
  logic [NCOLS-1:0][NROWS-1:0][EPS_W-1:0] eps_col;
  logic [NCOLS-1:0][31:0]       bl_pos, bl_neg;
  logic [NCOLS-1:0][ADC_W-1:0]  code_pos, code_neg;

  input_buffer #(.NROWS(NROWS)) u_xbuf (
    .clk, .rst_n, .we(x_we), .waddr(x_row), .wdata(x_val), .gate(!cal), .x(x)
  );

  mog_lfsr u_lfsr (
    .clk, .rst_n, .adv(mvm), .seed_we, .seed, .state(lfsr_state), .r(r)
  );

  grng_ctrl u_gctrl (.lfsr_state(lfsr_state), .en(mvm), .sel(gsel));

  for (genvar rr = 0; rr < NROWS; rr++) begin : g_row
    for (genvar cc = 0; cc < NCOLS; cc++) begin : g_sel
      dist_selector u_sel (
        .clk, .rst_n,
        .cfg_we(w_we && w_row == rr && w_col == cc),
        .cfg_pi(w_cfg.pi_cum), .cfg_f(w_cfg.f),
        .r(r),
        .b_prev((rr == 0) ? 1'b0 : b[(rr == 0) ? 0 : rr - 1][cc]),
        .b(b[rr][cc]),
        .alpha(alpha[rr][cc])
      );
      assign alpha_col[cc][rr] = alpha[rr][cc];
    end
    for (genvar hc = 0; hc < HCOLS; hc++) begin : g_grng
      logic [EPS_W-1:0] ec, ed;
      grng_cell #(.SEED(32'(rr * HCOLS + hc + 1))) u_grng (.sel(gsel), .eps_c(ec), .eps_d(ed));
      assign eps_col[2*hc][rr]   = ec;
      assign eps_col[2*hc+1][rr] = ed;
    end
  end

  for (genvar cc = 0; cc < NCOLS; cc++) begin : g_col
    cim_column #(.NROWS(NROWS)) u_col (
      .clk, .we(w_we && w_col == cc), .waddr(w_row), .wmu(w_cfg.mu), .wsig(w_cfg.sigma),
      .x(x), .alpha(alpha_col[cc]), .eps(eps_col[cc]),
      .bl_pos(bl_pos[cc]), .bl_neg(bl_neg[cc])
    );
    // Static ADC offsets of 0..3 LSB stand for the mismatch of a real die.
    sar_adc #(.OFFSET((cc * 5 + 1) % 4)) u_adc_p (.vin(bl_pos[cc]), .code(code_pos[cc]));
    sar_adc #(.OFFSET((cc * 3 + 2) % 4)) u_adc_n (.vin(bl_neg[cc]), .code(code_neg[cc]));
  end

  adc_cal_reduce #(.NCOLS(NCOLS)) u_red (
    .clk, .rst_n, .cal, .conv(mvm), .code_pos, .code_neg, .y, .y_valid
  );

endmodule
