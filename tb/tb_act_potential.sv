// Testbench of act_potential: h = R * sum of currents, taken only on phi_out
// and held afterwards.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_act_potential;
  `TB_COUNTERS
  logic clk = 0, phi_out = 0;
  always #5 clk = ~clk;
  real i_in [4];
  real h;
  act_potential #(.M(4)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 20; n++) begin
      real s;
      s = 0.0;
      @(negedge clk);
      for (int j = 0; j < 4; j++) begin
        i_in[j] = (real'($urandom_range(1000)) - 500.0) * 1e-6;
        s += i_in[j];
      end
      phi_out = 1;
      @(negedge clk); phi_out = 0;
      `CHECK_R(h, s * 1000.0, 1e-9, "h = R * sum")
      for (int j = 0; j < 4; j++) i_in[j] = 1e-3;
      @(negedge clk);
      `CHECK_R(h, s * 1000.0, 1e-9, "h held without phi_out")
    end
    `TB_FINISH
  end
endmodule
