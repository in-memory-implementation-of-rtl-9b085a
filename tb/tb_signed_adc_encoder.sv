// Testbench of signed_adc_encoder: every level -7..+7 as the thermometer
// codes the comparators would give, against the 1's complement code.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_signed_adc_encoder;
  `TB_COUNTERS
  logic [6:0] cmp_pos, cmp_neg;
  logic [3:0] code;
  signed_adc_encoder dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int v = -7; v <= 7; v++) begin
      logic [3:0] exp;
      int m;
      m = (v < 0) ? -v : v;
      cmp_pos = (v > 0) ? 7'((1 << m) - 1) : 7'd0;
      cmp_neg = (v < 0) ? 7'((1 << m) - 1) : 7'd0;
      exp = (v < 0) ? ~4'(m) : 4'(m);
      #1;
      `CHECK(code == exp, $sformatf("level %0d", v))
    end
    `TB_FINISH
  end
endmodule
