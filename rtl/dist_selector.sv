// dist_selector: in-word distribution selector, one per word.
//
// A weight with K Gaussian components occupies K adjacent words of a column.
// Each word holds, in flip-flops, a 4-bit cumulative mixing ratio code c_i and
// a flag F_i that marks the first word of a group. Every sample the global
// LFSR broadcasts a uniform 4-bit value r and each word computes
//   b_i     = (r <= c_i)
//   alpha_i = F_i ? b_i : b_i ^ b_(i-1)
// b_i comes from the previous word in the column (daisy chain). Because the
// cumulative codes rise along a group and the last word stores 15, exactly one
// word of each group has alpha=1: word i is chosen with probability
// (c_i - c_(i-1))/16. alpha gates the word's wordline.
// The comparison and the XOR/mux structure are the paper's. Storing the
// cumulative value (not pi_i itself) and the reset value (c=15, F=1: every word
// a K=1 group) are this design's reading of it.
// Timing: configuration is written on the clock edge where cfg_we=1; b and
// alpha are combinational in r and b_prev.
module dist_selector
  import mog_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [PI_W-1:0] cfg_pi,
  input  logic            cfg_f,
  input  logic [PI_W-1:0] r,
  input  logic            b_prev,
  output logic            b,
  output logic            alpha
);

  logic [PI_W-1:0] pi_q;
  logic            f_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi_q <= '1;
      f_q  <= 1'b1;
    end else if (cfg_we) begin
      pi_q <= cfg_pi;
      f_q  <= cfg_f;
    end
  end

  assign b     = (r <= pi_q);
  assign alpha = f_q ? b : (b ^ b_prev);

endmodule
