// cim_column: behavioural model of one compute-in-memory column of words.
// The storage is written as a memory array; the bitline discharge it feeds is
// analog, so this module is a model, not the circuit.
//
// Each of the NROWS words stores an 8-bit mean mu (sign in a 6T cell, seven
// magnitude bits in 8T cells) and a 4-bit standard deviation sigma (8T cells).
// In a sample, a word whose wordline is enabled (alpha=1) discharges the
// column's differential bitline pair in two ways:
//   x*|mu|*MU_UNIT onto BL+ if mu >= 0, else onto BL-   (the x*mu term)
//   x*sigma*|eps|  onto BL+ if eps > 0, else onto BL-   (the x*sigma*eps term)
// where x is the row's IDAC input and eps the signed GRNG pulse width (ticks
// of 1/8 ns) routed to the word. MU_UNIT = 8 makes one mu LSB equal to the
// discharge of sigma=1 over one 1 ns standard deviation of eps, so the word's
// effective weight is mu + sigma*eps/8. The sampled weight of a group is
// sum_i alpha_i*(mu_i + sigma_i*eps_i).
// Ideal linear discharge, ideal IDAC and binary bit weighting are this
// model's simplifications.
// Timing: SRAM write on the clock edge with we=1; bitline values are
// combinational (they settle within the sampling cycle).
module cim_column
  import mog_pkg::*;
#(
  parameter int NROWS = ROWS
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [$clog2(NROWS)-1:0]        waddr,
  input  logic [MU_W-1:0]                 wmu,
  input  logic [SIG_W-1:0]                wsig,
  input  logic [NROWS-1:0][X_W-1:0]       x,
  input  logic [NROWS-1:0]                alpha,
  input  logic [NROWS-1:0][EPS_W-1:0]     eps,
  output logic [31:0]                     bl_pos,
  output logic [31:0]                     bl_neg
);

  logic [MU_W-1:0]  mu_mem  [NROWS];
  logic [SIG_W-1:0] sig_mem [NROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      mu_mem[waddr]  <= wmu;
      sig_mem[waddr] <= wsig;
    end
  end

  always_comb begin
    logic [31:0]             p, n, t;
    logic signed [EPS_W-1:0] e;
    logic [EPS_W-1:0]        emag;
    p    = '0;
    n    = '0;
    t    = '0;
    e    = '0;
    emag = '0;
    for (int r = 0; r < NROWS; r++) begin
      if (alpha[r]) begin
        t = 32'(x[r]) * 32'(mu_mem[r][MU_W-2:0]) * 32'(MU_UNIT);
        if (mu_mem[r][MU_W-1]) n = n + t;
        else                   p = p + t;
        e = $signed(eps[r]);
        emag = (e < 0) ? EPS_W'(-e) : EPS_W'(e);
        t = 32'(x[r]) * 32'(sig_mem[r]) * 32'(emag);
        if (e < 0) n = n + t;
        else       p = p + t;
      end
    end
    bl_pos = p;
    bl_neg = n;
  end

endmodule
