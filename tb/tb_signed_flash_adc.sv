// Testbench of signed_flash_adc: a fine sweep of the input against the
// rounded level clamp(round(v / V_res), -7, 7) in 1's complement, avoiding
// points within 1 mV of a threshold.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_signed_flash_adc;
  `TB_COUNTERS
  localparam real VRES = 0.496 / 7.0;
  real v_in;
  logic [3:0] code;
  signed_flash_adc dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = -700; n <= 700; n++) begin
      real q, fr;
      int lvl;
      logic [3:0] exp;
      v_in = n * 0.001;
      q = v_in / VRES;
      fr = q - $floor(q);
      if (fr > 0.485 && fr < 0.515) continue;
      lvl = (q >= 0) ? int'($floor(q + 0.5)) : -int'($floor(-q + 0.5));
      if (lvl > 7) lvl = 7;
      if (lvl < -7) lvl = -7;
      exp = (lvl < 0) ? ~4'(-lvl) : 4'(lvl);
      #1;
      `CHECK(code == exp, $sformatf("v=%f", v_in))
    end
    `TB_FINISH
  end
endmodule
