// grng_ctrl: GRNG control, shared by all GRNG cells of the tile.
//
// Every GRNG cell has two entropy banks of seven PMOS devices (charge cycle)
// and two of seven NMOS devices (discharge cycle). For each sample one device
// of each bank is biased, chosen by the global LFSR; the same choice is sent to
// every cell, whose devices differ by static process variation.
// This block cuts four 3-bit fields from the LFSR state and decodes each into a
// one-hot 7-way select (field value v picks device v mod 7):
//   charge Sel+  : state[6:4]          charge Sel-  : state[9:7]
//   discharge Sel+: {state[11:10],state[0]}  discharge Sel-: state[3:1]
// The field positions and the mod-7 mapping are this design's choices.
// With en=0 no device is selected (all banks off).
// Timing: purely combinational.
module grng_ctrl
  import mog_pkg::*;
(
  input  logic [LFSR_W-1:0] lfsr_state,
  input  logic              en,
  output grng_sel_t         sel
);

  function automatic logic [BANK_N-1:0] dec(input logic [2:0] v, input logic on);
    logic [2:0] idx;
    idx = (v == 3'd7) ? 3'd0 : v;
    return on ? BANK_N'(1) << idx : '0;
  endfunction

  always_comb begin
    sel.c_p = dec(lfsr_state[6:4], en);
    sel.c_n = dec(lfsr_state[9:7], en);
    sel.d_p = dec({lfsr_state[11:10], lfsr_state[0]}, en);
    sel.d_n = dec(lfsr_state[3:1], en);
  end

endmodule
