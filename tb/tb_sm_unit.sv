// Testbench of sm_unit: each S[1:0] picks its input pair and output, the
// other outputs stay 0, S = 00 routes nothing, and eta scales only dw.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_sm_unit;
  import imc_ann_pkg::*;
  `TB_COUNTERS
  sm_sel_e sel;
  real a, w, delta, i_act, dw, i_bp;
  sm_unit #(.ETA(0.1), .A(10.0)) dut (.*);

  function automatic real mul(input real x1, input real x2);
    real vds, vov;
    vds = x2 / 10.0;
    vov = x1 < 0 ? -x1 : x1;
    return (x1 < 0 ? -1.0 : 1.0) * (vov * vds - 0.5 * vds * (vds < 0 ? -vds : vds)) * 10.0 / 1000.0;
  endfunction

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 50; n++) begin
      a = real'($urandom_range(1000)) / 1000.0;
      w = (real'($urandom_range(1000)) - 500.0) / 1000.0;
      delta = (real'($urandom_range(1000)) - 500.0) / 1000.0;
      sel = SM_FF; #1;
      `CHECK_R(i_act, mul(w, a), 1e-12, "S=01 a*w'")
      `CHECK(dw == 0.0 && i_bp == 0.0, "S=01 other outputs idle")
      sel = SM_WU; #1;
      `CHECK_R(dw, 0.1 * mul(a, delta) * 1000.0, 1e-9, "S=10 eta*delta*a")
      `CHECK(i_act == 0.0 && i_bp == 0.0, "S=10 other outputs idle")
      sel = SM_BP; #1;
      `CHECK_R(i_bp, mul(w, delta), 1e-12, "S=11 delta*w'")
      `CHECK(i_act == 0.0 && dw == 0.0, "S=11 other outputs idle")
      sel = SM_IDLE; #1;
      `CHECK(i_act == 0.0 && dw == 0.0 && i_bp == 0.0, "S=00 nowhere")
    end
    `TB_FINISH
  end
endmodule
