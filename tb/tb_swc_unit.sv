// Testbench of swc_unit: bit-line voltages of every 1's complement weight
// give the right sign and the signed voltage +-|w| * LSB.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_swc_unit;
  `TB_COUNTERS
  localparam real LSB = 0.496 / 7.0;
  real v_bl, v_blb, v_mux, w;
  logic s_w;
  swc_unit dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int code = 0; code < 16; code++) begin
      int val;
      val = (code >= 8) ? -(15 - code) : code;   // 1's complement value
      v_blb = 1.0 - code * LSB;
      v_bl  = 1.0 - (15 - code) * LSB;
      if (v_bl < 0.0) v_bl = 0.0;
      #1;
      `CHECK(s_w == (code >= 8), $sformatf("sign of code %0d", code))
      `CHECK_R(w, val * LSB, 1e-6, $sformatf("signed weight of code %0d", code))
    end
    `TB_FINISH
  end
endmodule
