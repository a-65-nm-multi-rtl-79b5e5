// mog_bnn_engine: top of the Mixture-of-Gaussian Bayesian fully connected
// inference engine.
//
// A RISC-V core (outside this RTL) feeds feature vectors from a convolutional
// feature extractor into Bayesian fully connected layers computed in memory.
// Every weight is a mixture of K Gaussians (K = 1..16, set per word group
// after fabrication); each sample draws one component per weight with a
// shared LFSR and adds sigma*eps from in-word Gaussian random number
// generators that need no calibration. Running each input R times gives the
// output spread used as the uncertainty estimate.
// This top joins the register controller and one 64 x 8-word CIM tile. The
// core's register bus is brought out as plain ports (see tile_controller for
// the map); larger layers are run by reprogramming the tile (tile reuse).
// Timing: one sample per clock; a run of R samples ends R+2 clocks after the
// start write, signalled by done_irq.
module mog_bnn_engine
  import mog_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS,
  parameter int R_MAX = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_valid,
  input  logic        bus_we,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        bus_rvalid,
  output logic        done_irq
);

  logic                      w_we, x_we, seed_we, mvm, cal, y_valid;
  logic [$clog2(NROWS)-1:0]  w_row, x_row;
  logic [$clog2(NCOLS)-1:0]  w_col;
  word_cfg_t                 w_cfg;
  logic [X_W-1:0]            x_val;
  logic [LFSR_W-1:0]         seed;
  logic [NCOLS-1:0][Y_W-1:0] y;

  tile_controller #(.NROWS(NROWS), .NCOLS(NCOLS), .R_MAX(R_MAX)) u_ctrl (
    .clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_rvalid, .done_irq,
    .w_we, .w_row, .w_col, .w_cfg, .x_we, .x_row, .x_val, .seed_we, .seed, .mvm, .cal, .y, .y_valid
  );

  cim_tile #(.NROWS(NROWS), .NCOLS(NCOLS)) u_tile (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_cfg, .x_we, .x_row, .x_val, .seed_we, .seed,
    .mvm, .cal, .y, .y_valid
  );

endmodule
