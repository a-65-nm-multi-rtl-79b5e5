// tb_sar_adc: self-checking testbench of the SAR ADC model with a 2-LSB
// offset: every input from 0 to past full scale must give
// min(63, floor(vin/64) + 2).
`timescale 1ns/1ps
module tb_sar_adc;
  import mog_pkg::*;
  logic [31:0] vin;
  logic [5:0] code;
  int checks = 0, failures = 0;
  sar_adc #(.LSB_SHIFT(6), .OFFSET(2)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 5000; v += 3) begin
      int e;
      vin = 32'(v); #1;
      e = v / 64 + 2; if (e > 63) e = 63;
      check(int'(code) == e, $sformatf("vin %0d code %0d exp %0d", v, code, e));
    end
    vin = 32'hFFFF_FFFF; #1;
    check(code == 6'd63, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
