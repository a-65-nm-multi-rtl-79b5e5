// tb_grng_ctrl: self-checking testbench of the GRNG control decoder. For all
// 4096 LFSR states each select must be one-hot and pick the device given by
// the documented bit field (value mod 7); with en=0 all selects are zero.
// Over all states every device must be used.
`timescale 1ns/1ps
module tb_grng_ctrl;
  import mog_pkg::*;
  logic [11:0] lfsr_state;
  logic en;
  grng_sel_t sel;
  int checks = 0, failures = 0;
  grng_ctrl dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int idx7(input int v);
    return v % 7;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int used [4][7];
    foreach (used[a, b]) used[a][b] = 0;
    for (int s = 0; s < 4096; s++) begin
      int f [4];
      logic [6:0] v [4];
      lfsr_state = 12'(s); en = 1; #1;
      f[0] = (s >> 4) & 7; f[1] = (s >> 7) & 7;
      f[2] = (((s >> 10) & 3) << 1) | (s & 1); f[3] = (s >> 1) & 7;
      v[0] = sel.c_p; v[1] = sel.c_n; v[2] = sel.d_p; v[3] = sel.d_n;
      for (int k = 0; k < 4; k++) begin
        check(v[k] == 7'(1 << idx7(f[k])), $sformatf("state %h sel %0d = %b", s, k, v[k]));
        used[k][idx7(f[k])]++;
      end
      en = 0; #1;
      check(sel == '0, "disabled");
    end
    foreach (used[a, b]) check(used[a][b] > 0, "device used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
