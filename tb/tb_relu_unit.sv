// Testbench of relu_unit: a = max(0, h), derivative and local gradient on
// both sides of zero, including h = 0.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_relu_unit;
  `TB_COUNTERS
  real h, g_in, a, delta;
  logic dphi;
  relu_unit dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 100; n++) begin
      h = (n == 0) ? 0.0 : (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      g_in = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      #1;
      `CHECK_R(a, (h > 0.0) ? h : 0.0, 1e-12, "a = max(0, h)")
      `CHECK(dphi == (h > 0.0), "derivative")
      `CHECK_R(delta, (h > 0.0) ? g_in : 0.0, 1e-12, "local gradient")
    end
    `TB_FINISH
  end
endmodule
