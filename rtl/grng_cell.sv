// grng_cell: behavioural model of one calibration-free in-word GRNG cell.
// This is a model of an analog circuit, not synthesizable hardware.
//
// The real cell has four banks of seven minimum-size transistors: two PMOS
// banks (charge cycle, bias V_BC) and two NMOS banks (discharge cycle, bias
// V_BD). For each sample one device of each "+" and "-" bank is selected
// (Sel+/Sel-, one-hot, from grng_ctrl). The two selected devices charge (then
// discharge) two identical 1 fF capacitors; static device-to-device mismatch
// makes one side cross the inverter threshold first. Inverter chains sharpen
// the crossings into edges P and N, and four 3-input gates (CLK-bar,P,N-bar),
// (CLK-bar,P-bar,N), (CLK,P-bar,N), (CLK,P,N-bar) produce the pulses eps_C+,
// eps_C-, eps_D+, eps_D- whose width is the edge-time difference T_D. Because
// both banks are drawn from the same distribution, T_D has zero mean with no
// per-cell calibration; 7x7 device pairs give 49 distinct values per cycle.
//
// Model: each device's crossing time is T0_TICKS plus a static per-instance
// deviation (sum of four pseudo-random integers in 0..9, minus 18), derived
// from SEED so that every instance is a different "die location". Time runs
// on a grid of 1/8 ns ticks; T0 = 27 ticks (~3.4 ns) and the pair difference
// has an SD of ~8 ticks (~1 ns). The model steps through one half clock period
// (54 ticks at 74.1 MHz) per phase; the pulse widths are taken in closed form
// from the edge times, which is what the gates of mog_pkg::grng_gates produce
// (the testbench checks this tick by tick). Outputs are the signed
// widths eps_c = |eps_C+| - |eps_C-| and eps_d = |eps_D+| - |eps_D-|, the
// numeric equivalent of the pulses that gate the sigma bitline discharge.
// The device statistics, tick size and numeric output are this model's
// choices. Timing: combinational in sel (the analog settling within one
// system clock is not modelled as delay).
module grng_cell
  import mog_pkg::*;
#(
  parameter int unsigned SEED     = 1,
  parameter int          T0_TICKS = 27,
  parameter int          HALF_T   = 54
) (
  input  grng_sel_t               sel,
  output logic signed [EPS_W-1:0] eps_c,
  output logic signed [EPS_W-1:0] eps_d
);

  // Static crossing time of device idx in bank (0: C+, 1: C-, 2: D+, 3: D-).
  function automatic int dev_delay(input int bank, input int idx);
    logic [31:0] h;
    int          acc;
    acc = 0;
    for (int k = 0; k < 4; k++) begin
      // murmur3 finalizer over (seed, device, draw)
      h = SEED * 32'h9E3779B1 ^ 32'(bank * 7 + idx) * 32'h85EBCA6B ^ 32'(k) * 32'hC2B2AE35;
      h = h ^ (h >> 16);
      h = h * 32'h85EBCA6B;
      h = h ^ (h >> 13);
      h = h * 32'hC2B2AE35;
      h = h ^ (h >> 16);
      acc = acc + int'(h % 32'd10);
    end
    return T0_TICKS + acc - 18;
  endfunction

  function automatic int onehot_idx(input logic [BANK_N-1:0] v);
    int idx;
    idx = -1;
    for (int i = 0; i < BANK_N; i++) if (v[i]) idx = i;
    return idx;
  endfunction

  // Device crossing time selected by a one-hot select; -1 when none.
  function automatic int sel_delay(input int bank, input logic [BANK_N-1:0] v);
    int d;
    d = -1;
    for (int i = 0; i < BANK_N; i++) if (v[i]) d = dev_delay(bank, i);
    return d;
  endfunction

  // Width of eps_X+ minus width of eps_X- over one half period, for a "+"
  // edge at t_pl and a "-" edge at t_mi (the closed form of the gates of
  // mog_pkg::grng_gates: the "+" pulse lasts from the "+" edge to the "-"
  // edge when "+" comes first, and the reverse for "-").
  function automatic logic [EPS_W-1:0] pulse(input int t_pl, input int t_mi);
    int a, b;
    if (t_pl < 0 || t_mi < 0) return '0;
    a = (t_pl > HALF_T) ? HALF_T : t_pl;
    b = (t_mi > HALF_T) ? HALF_T : t_mi;
    return EPS_W'(b - a);
  endfunction

  // charge cycle (CLK low): P/N rise at the crossings, "+" wins when P is first
  assign eps_c = pulse(sel_delay(0, sel.c_p), sel_delay(1, sel.c_n));
  // discharge cycle (CLK high): P/N fall at the crossings, eps_D- when N falls first
  assign eps_d = pulse(sel_delay(2, sel.d_p), sel_delay(3, sel.d_n));

endmodule
