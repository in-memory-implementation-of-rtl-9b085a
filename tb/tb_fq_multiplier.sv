// Testbench of fq_multiplier: the four quadrants against the ideal product
// V_in1 * V_in2 / 1 kOhm, with the triode error bounded by the square term
// 0.5 V_in2^2 / (A R) (A = 10), and larger A giving a smaller worst-case error.
// The worst-case error at 1 V x 1 V, read as a voltage across 1 kOhm, must be
// 0.5/A V in all four quadrants: 50 mV at A = 10 and 5 mV at A = 100, the
// end points of the published error-versus-A curves.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_fq_multiplier;
  `TB_COUNTERS
  real v_in1, v_in2, i_mult, i_big, i_100;
  fq_multiplier #(.A(10.0)) dut (.*);
  fq_multiplier #(.A(40.0)) dut40 (.v_in1, .v_in2, .i_mult(i_big));
  fq_multiplier #(.A(100.0)) dut100 (.v_in1, .v_in2, .i_mult(i_100));

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 200; n++) begin
      real ideal, tol;
      v_in1 = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      v_in2 = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      #1;
      ideal = v_in1 * v_in2 / 1000.0;
      tol   = 0.0501 * v_in2 * v_in2 / 1000.0 + 1e-12;   // 0.5 V_DS^2 term
      `CHECK_R(i_mult, ideal, tol, "product within triode error")
      if ((v_in1 < 0 ? -v_in1 : v_in1) > (v_in2 < 0 ? -v_in2 : v_in2) / 10.0)
        `CHECK((i_mult >= 0.0) == (ideal >= 0.0), "quadrant sign")
    end
    v_in1 = 1.0; v_in2 = 1.0; #1;
    `CHECK_R(i_mult, 0.95e-3, 1e-9, "1 V x 1 V at A = 10")
    `CHECK(1e-3 - i_big < 1e-3 - i_mult, "larger A, smaller error")
    for (int q = 0; q < 4; q++) begin
      v_in1 = q[0] ? -1.0 : 1.0;
      v_in2 = q[1] ? -1.0 : 1.0;
      #1;
      `CHECK_R(1000.0 * (v_in1 * v_in2 / 1000.0 - i_mult) * v_in1 * v_in2, 0.050, 1e-9, "error 50 mV at A = 10")
      `CHECK_R(1000.0 * (v_in1 * v_in2 / 1000.0 - i_100) * v_in1 * v_in2, 0.005, 1e-9, "error 5 mV at A = 100")
    end
    `TB_FINISH
  end
endmodule
