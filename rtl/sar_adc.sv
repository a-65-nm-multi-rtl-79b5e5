// sar_adc: behavioural model of a 6-bit successive-approximation ADC that
// digitizes one bitline of a column. The comparator and capacitive DAC are
// analog, so this is a model.
//
// The input is the bitline discharge in the units of cim_column. The model
// performs the six SAR decisions MSB first: a trial bit is kept when the
// input plus the ADC's static offset reaches the trial level. One LSB is
// 2^LSB_SHIFT units; LSB_SHIFT = 6 keeps one input unit (x=1) times the
// largest sigma (15) over one eps standard deviation (8 ticks) = 120 units
// above one LSB. Codes saturate at 63. OFFSET (LSBs, >= 0) models a static
// per-ADC offset that the calibration cycle removes.
// LSB size and offset model are this design's choices.
// Timing: combinational (the conversion completes within the MVM cycle).
module sar_adc
  import mog_pkg::*;
#(
  parameter int LSB_SHIFT = 6,
  parameter int OFFSET    = 0
) (
  input  logic [31:0]      vin,
  output logic [ADC_W-1:0] code
);

  always_comb begin
    logic [63:0]      v, level;
    logic [ADC_W-1:0] c, trial;
    v = 64'(vin) + (64'(OFFSET) << LSB_SHIFT);
    c = '0;
    for (int b = ADC_W - 1; b >= 0; b--) begin
      trial = c | ADC_W'(1 << b);
      level = 64'(trial) << LSB_SHIFT;
      if (v >= level) c = trial;
    end
    code = c;
  end

endmodule
