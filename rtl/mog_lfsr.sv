// mog_lfsr: the tile's single global 12-bit linear feedback shift register.
//
// One LFSR is shared by every distribution selector (which read the 4-bit
// uniform value r) and every GRNG cell (whose entropy-bank devices are picked
// from other state bits by grng_ctrl). Sharing one source is what the tile
// does instead of per-word random sources.
// Fibonacci form, polynomial x^12 + x^6 + x^4 + x + 1 (maximal length, period
// 4095); the polynomial, the STEPS shifts per sample and the seed port are this
// design's choices. r = state[3:0].
// Timing: state changes on the clock edge where adv=1 (STEPS shifts at once)
// or seed_we=1 (load; a zero seed is replaced by 1 so the register never locks).
module mog_lfsr
  import mog_pkg::*;
#(
  parameter int                STEPS = 4,
  parameter logic [LFSR_W-1:0] SEED  = 12'hACE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              adv,
  input  logic              seed_we,
  input  logic [LFSR_W-1:0] seed,
  output logic [LFSR_W-1:0] state,
  output logic [PI_W-1:0]   r
);

  function automatic logic [LFSR_W-1:0] step(input logic [LFSR_W-1:0] s);
    return {s[LFSR_W-2:0], s[11] ^ s[5] ^ s[3] ^ s[0]};
  endfunction

  logic [LFSR_W-1:0] nxt;
  always_comb begin
    nxt = state;
    for (int i = 0; i < STEPS; i++) nxt = step(nxt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= SEED;
    else if (seed_we) state <= (seed == '0) ? LFSR_W'(1) : seed;
    else if (adv)     state <= nxt;
  end

  assign r = state[PI_W-1:0];

  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0)
    else $error("LFSR locked at zero");

endmodule
