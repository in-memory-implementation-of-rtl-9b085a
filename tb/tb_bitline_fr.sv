// Testbench of bitline_fr: for every stored 4-bit word, precharge and the
// binary-weighted word line pulses leave dV_BLB = word * LSB and
// dV_BL = (15 - word) * LSB, the latter limited by the 0 V floor.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_bitline_fr;
  `TB_COUNTERS
  localparam real LSB = 0.496 / 7.0;
  logic clk = 0, pre = 0;
  always #5 clk = ~clk;
  logic [3:0] wl = 0, bits = 0;
  real v_bl, v_blb;
  bitline_fr #(.BW(4)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int wv = 0; wv < 16; wv++) begin
      real e_bl, e_blb;
      bits = 4'(wv);
      @(negedge clk); pre = 1;
      @(negedge clk); pre = 0;
      `CHECK_R(v_bl, 1.0, 1e-9, "precharged BL")
      for (int c = 0; c < 8; c++) begin
        for (int i = 0; i < 4; i++) wl[i] = (c < (1 << i));
        @(negedge clk);
      end
      wl = 0;
      @(negedge clk);
      e_blb = 1.0 - wv * LSB;
      e_bl  = 1.0 - (15 - wv) * LSB;
      if (e_bl < 0.0) e_bl = 0.0;
      if (e_blb < 0.0) e_blb = 0.0;
      `CHECK_R(v_blb, e_blb, 1e-6, $sformatf("BLB for word %0d", wv))
      `CHECK_R(v_bl,  e_bl,  1e-6, $sformatf("BL for word %0d", wv))
    end
    `TB_FINISH
  end
endmodule
