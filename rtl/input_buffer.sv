// input_buffer: the tile's input buffer X, one 4-bit value per row.
//
// During a matrix-vector multiplication each row's value drives that row's
// current DAC (IDAC), whose output reaches a word only if the word's
// distribution selector enables it. The controller writes one row per cycle.
// A word of a K-component mixture group spans K rows, so software writes the
// same input into every row of a group.
// gate=0 switches every row off (x reads as 0); the tile uses this for the ADC
// offset calibration cycle. The gate and the reset-to-zero are this design's
// choices; the buffer itself is only named in the source description.
// Timing: write on the clock edge with we=1; x is the register contents
// (gated combinationally).
module input_buffer
  import mog_pkg::*;
#(
  parameter int NROWS = ROWS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            we,
  input  logic [$clog2(NROWS)-1:0]        waddr,
  input  logic [X_W-1:0]                  wdata,
  input  logic                            gate,
  output logic [NROWS-1:0][X_W-1:0]       x
);

  logic [NROWS-1:0][X_W-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  mem <= '0;
    else if (we) mem[waddr] <= wdata;
  end

  assign x = gate ? mem : '0;

endmodule
