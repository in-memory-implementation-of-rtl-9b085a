// Testbench of error_unit: e = t - y and V_E = -sum e^2 (K = 2 mA/V^2,
// R1 = 1 kOhm) for errors of both signs.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_error_unit;
  `TB_COUNTERS
  real t [3], y [3], e [3];
  real v_e;
  error_unit #(.N(3)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 100; n++) begin
      real sq;
      sq = 0.0;
      for (int l = 0; l < 3; l++) begin
        t[l] = real'($urandom_range(1));
        y[l] = real'($urandom_range(1000)) / 1000.0;
        sq += (t[l] - y[l]) * (t[l] - y[l]);
      end
      #1;
      for (int l = 0; l < 3; l++) `CHECK_R(e[l], t[l] - y[l], 1e-12, "e = t - y")
      `CHECK_R(v_e, -sq, 1e-9, "V_E = -sum e^2")
    end
    `TB_FINISH
  end
endmodule
