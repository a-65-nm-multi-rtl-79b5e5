// mog_pkg: sizes, types and small shared functions of the Mixture-of-Gaussian
// (MoG) Bayesian compute-in-memory tile.
//
// The tile holds 64 rows x 8 columns of words. Each word stores one Gaussian
// component of a weight: an 8-bit sign-magnitude mean mu and a 4-bit unsigned
// standard deviation sigma. A per-word distribution selector holds a 4-bit
// cumulative mixing ratio and a group-start flag F; a global 12-bit LFSR feeds
// every selector and every Gaussian random number generator (GRNG) cell.
// The sizes below are the ones the design is built around (64x8 words, 4-bit
// inputs, 6-bit ADCs, 7-device entropy banks, 12-bit LFSR). The tick, unit and
// register-map constants are this design's own choices.
package mog_pkg;

  localparam int ROWS    = 64;   // words per column
  localparam int COLS    = 8;    // columns (one ADC pair each)
  localparam int X_W     = 4;    // input (IDAC) bits
  localparam int MU_W    = 8;    // mean: sign + 7 magnitude bits
  localparam int SIG_W   = 4;    // standard deviation bits
  localparam int PI_W    = 4;    // mixing ratio bits
  localparam int LFSR_W  = 12;   // global LFSR
  localparam int ADC_W   = 6;    // SAR ADC resolution
  localparam int BANK_N  = 7;    // devices per entropy bank
  localparam int EPS_W   = 8;    // signed GRNG sample, in ticks of 1/8 ns
  localparam int Y_W     = ADC_W + 2; // signed column result
  localparam int MU_UNIT = 8;    // bitline units per mu LSB (= one eps SD)

  // Configuration of one word, as written by the controller.
  typedef struct packed {
    logic             f;       // 1: first word of a mixture group
    logic [PI_W-1:0]  pi_cum;  // cumulative mixing ratio code, P = (code+1)/16
    logic [SIG_W-1:0] sigma;   // standard deviation
    logic [MU_W-1:0]  mu;      // mean, bit 7 = sign, bits 6:0 = magnitude
  } word_cfg_t;

  // One-hot device selects of the two entropy banks (Sel+ and Sel-) for the
  // charge (PMOS) and discharge (NMOS) cycles.
  typedef struct packed {
    logic [BANK_N-1:0] c_p;
    logic [BANK_N-1:0] c_n;
    logic [BANK_N-1:0] d_p;
    logic [BANK_N-1:0] d_n;
  } grng_sel_t;

  // Pulse-extraction gates of a GRNG cell. Inputs: the phase clock and the
  // sharpened capacitor edges P and N. Returns {eps_c_p, eps_c_n, eps_d_p, eps_d_n}.
  // eps_C+ is active while P has crossed and N has not in the charge phase
  // (clk low); eps_D- while N has fallen and P has not in the discharge phase.
  function automatic logic [3:0] grng_gates(input logic clk, input logic p, input logic n);
    return { ~clk &  p & ~n,    // eps_C+
             ~clk & ~p &  n,    // eps_C-
              clk & ~p &  n,    // eps_D+
              clk &  p & ~n };  // eps_D-
  endfunction

  // Register map of the controller (word addresses on the core's bus).
  localparam logic [15:0] A_CTRL   = 16'h0000; // W: [0] run, [1] cal, [15:8] R ; R: status
  localparam logic [15:0] A_SEED   = 16'h0001; // W: LFSR seed
  localparam logic [15:0] A_WORD   = 16'h1000; // + row*COLS + col : word_cfg_t
  localparam logic [15:0] A_X      = 16'h2000; // + row : input value
  localparam logic [15:0] A_RES    = 16'h3000; // + sample*COLS + col : signed result

endpackage
