// tile_controller: register interface between the system's RISC-V core and
// the CIM tile, and the sequencer of a Bayesian inference run.
//
// Bayesian inference evaluates the same input R times with freshly sampled
// weights; the spread of the R outputs is the uncertainty. The core programs
// the tile's words and inputs through this block, then starts a run of R
// back-to-back samples (one per clock) and reads back the R x NCOLS results;
// statistics and tile reuse for layers larger than the tile are left to the
// core's software.
// Register map (word addresses; a request is one cycle with bus_valid=1):
//   A_CTRL  W: [0] run, [1] calibrate, [15:8] R (1..R_MAX, 0 means 1)
//           R: [0] busy, [1] done (cleared by the next run/cal), [2] error
//              (sticky: a tile write or start was refused while busy),
//              [15:8] R of the last run
//   A_SEED  W: [11:0] LFSR seed
//   A_WORD + row*NCOLS + col  W: word_cfg_t {F, pi code, sigma, mu}
//   A_X + row                 W: [3:0] input
//   A_RES + s*NCOLS + col     R: sample s, column col, sign-extended
// Read data returns one clock after the request with bus_rvalid=1.
// Sequence: IDLE -> RUN (mvm for R clocks) -> DRAIN (last result) -> IDLE,
// or IDLE -> CAL (one calibration clock) -> IDLE.
// The controller is only named in the source description: the register map,
// bus, result buffer and refusal rule are this design's.
module tile_controller
  import mog_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS,
  parameter int R_MAX = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // core side
  input  logic                               bus_valid,
  input  logic                               bus_we,
  input  logic [15:0]                        bus_addr,
  input  logic [31:0]                        bus_wdata,
  output logic [31:0]                        bus_rdata,
  output logic                               bus_rvalid,
  output logic                               done_irq,
  // tile side
  output logic                               w_we,
  output logic [$clog2(NROWS)-1:0]           w_row,
  output logic [$clog2(NCOLS)-1:0]           w_col,
  output word_cfg_t                          w_cfg,
  output logic                               x_we,
  output logic [$clog2(NROWS)-1:0]           x_row,
  output logic [X_W-1:0]                     x_val,
  output logic                               seed_we,
  output logic [LFSR_W-1:0]                  seed,
  output logic                               mvm,
  output logic                               cal,
  input  logic [NCOLS-1:0][Y_W-1:0]          y,
  input  logic                               y_valid
);

  localparam int CB = $clog2(NCOLS);
  localparam int RB = $clog2(NROWS);
  localparam int SB = $clog2(R_MAX + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_CAL} state_t;
  state_t state;

  logic [SB-1:0] r_cnt, issued, stored;
  logic          done_q, err_q;
  logic [Y_W-1:0] res_mem [R_MAX][NCOLS];

  wire busy   = (state != S_IDLE);
  wire wr     = bus_valid && bus_we;
  wire rd     = bus_valid && !bus_we;
  wire a_ctrl = (bus_addr == A_CTRL);
  wire a_seed = (bus_addr == A_SEED);
  wire a_word = (bus_addr >= A_WORD) && (bus_addr < A_WORD + 16'(NROWS * NCOLS));
  wire a_x    = (bus_addr >= A_X)    && (bus_addr < A_X + 16'(NROWS));
  wire a_res  = (bus_addr >= A_RES)  && (bus_addr < A_RES + 16'(R_MAX * NCOLS));
  wire [15:0] off_word = bus_addr - A_WORD;
  wire [15:0] off_x    = bus_addr - A_X;
  wire [15:0] off_res  = bus_addr - A_RES;

  // tile configuration writes pass straight through when idle
  assign w_we    = wr && a_word && !busy;
  assign w_row   = off_word[CB +: RB];
  assign w_col   = off_word[CB-1:0];
  assign w_cfg   = word_cfg_t'(bus_wdata[$bits(word_cfg_t)-1:0]);
  assign x_we    = wr && a_x && !busy;
  assign x_row   = off_x[RB-1:0];
  assign x_val   = bus_wdata[X_W-1:0];
  assign seed_we = wr && a_seed && !busy;
  assign seed    = bus_wdata[LFSR_W-1:0];

  assign mvm = (state == S_RUN);
  assign cal = (state == S_CAL);

  wire [SB-1:0] r_req = (bus_wdata[15:8] == 8'd0) ? SB'(1)
                      : (bus_wdata[15:8] > 8'(R_MAX)) ? SB'(R_MAX) : SB'(bus_wdata[15:8]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      r_cnt    <= SB'(1);
      issued   <= '0;
      stored   <= '0;
      done_q   <= 1'b0;
      err_q    <= 1'b0;
      done_irq <= 1'b0;
    end else begin
      done_irq <= 1'b0;
      if (wr && busy && (a_word || a_x || a_seed || a_ctrl)) err_q <= 1'b1;
      case (state)
        S_IDLE: if (wr && a_ctrl) begin
          if (bus_wdata[0]) begin
            state  <= S_RUN;
            r_cnt  <= r_req;
            issued <= '0;
            stored <= '0;
            done_q <= 1'b0;
          end else if (bus_wdata[1]) begin
            state  <= S_CAL;
            done_q <= 1'b0;
          end
        end
        S_RUN: begin
          issued <= issued + 1'b1;
          if (issued + 1'b1 == r_cnt) state <= S_DRAIN;
        end
        S_DRAIN: if (stored == r_cnt) begin
          state    <= S_IDLE;
          done_q   <= 1'b1;
          done_irq <= 1'b1;
        end
        S_CAL: begin
          state    <= S_IDLE;
          done_q   <= 1'b1;
          done_irq <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
      if (y_valid && (state == S_RUN || state == S_DRAIN)) stored <= stored + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (y_valid && (state == S_RUN || state == S_DRAIN) && stored < SB'(R_MAX))
      for (int c = 0; c < NCOLS; c++) res_mem[stored[SB-1:0] % R_MAX][c] <= y[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_rdata  <= '0;
      bus_rvalid <= 1'b0;
    end else begin
      bus_rvalid <= rd;
      if (rd) begin
        if (a_ctrl)
          bus_rdata <= {16'd0, 8'(r_cnt), 5'd0, err_q, done_q, busy};
        else if (a_res)
          bus_rdata <= 32'($signed(res_mem[off_res / 16'(NCOLS)][off_res % 16'(NCOLS)]));
        else
          bus_rdata <= '0;
      end
    end
  end

  a_no_cal_mvm: assert property (@(posedge clk) disable iff (!rst_n) !(mvm && cal))
    else $error("mvm and cal together");
  a_one_result_per_sample: assert property (@(posedge clk) disable iff (!rst_n) stored <= r_cnt || state == S_IDLE)
    else $error("more results than samples");

endmodule
