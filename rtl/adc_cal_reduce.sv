// adc_cal_reduce: ADC calibration and reduction for all columns.
//
// Each column has two ADCs, one on BL+ and one on BL-. During a calibration
// cycle every wordline is off, so each ADC reads only its own offset; the
// block stores these codes (cal=1). In a sample cycle (conv=1) it removes the
// offsets and reduces the pair to one signed result per column:
//   y[c] = (code_pos[c] - off_pos[c]) - (code_neg[c] - off_neg[c])
// The block is only named in the source description; offset capture and
// differential reduction are this design's reading of its name.
// Timing: offsets and y are registered; y_valid pulses the cycle after conv.
module adc_cal_reduce
  import mog_pkg::*;
#(
  parameter int NCOLS = COLS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                cal,
  input  logic                                conv,
  input  logic [NCOLS-1:0][ADC_W-1:0]         code_pos,
  input  logic [NCOLS-1:0][ADC_W-1:0]         code_neg,
  output logic [NCOLS-1:0][Y_W-1:0]           y,
  output logic                                y_valid
);

  logic [NCOLS-1:0][ADC_W-1:0] off_pos, off_neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off_pos <= '0;
      off_neg <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= conv;
      if (cal) begin
        off_pos <= code_pos;
        off_neg <= code_neg;
      end
      if (conv) begin
        for (int c = 0; c < NCOLS; c++)
          y[c] <= Y_W'($signed({2'b00, code_pos[c]}) - $signed({2'b00, off_pos[c]}))
                - Y_W'($signed({2'b00, code_neg[c]}) - $signed({2'b00, off_neg[c]}));
      end
    end
  end

  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(cal && conv))
    else $error("calibration and conversion in the same cycle");

endmodule
