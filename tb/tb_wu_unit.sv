// Testbench of wu_unit: phi_s loads the weight, each phi_b/phi_l/phi_u
// sequence adds dw, a sequence without phi_u leaves it, and the rails clamp.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_wu_unit;
  `TB_COUNTERS
  logic clk = 0, phi_s = 0, phi_b = 0, phi_l = 0, phi_u = 0;
  always #5 clk = ~clk;
  real w_in = 0.0, dw = 0.0, w_out;
  wu_unit #(.W_MAX(1.0)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  task automatic update(input real d, input bit do_u);
    @(negedge clk); dw = d; phi_b = 1;
    @(negedge clk); phi_b = 0; dw = 0.0; phi_l = 1;
    @(negedge clk); phi_l = 0; phi_u = do_u;
    @(negedge clk); phi_u = 0;
  endtask

  initial begin
    real model;
    @(negedge clk); w_in = 0.25; phi_s = 1;
    @(negedge clk); phi_s = 0; w_in = -0.9;
    `CHECK_R(w_out, 0.25, 1e-9, "sampled weight")
    model = 0.25;
    for (int n = 0; n < 20; n++) begin
      real d;
      d = (real'($urandom_range(200)) - 100.0) / 1000.0;
      update(d, 1'b1);
      model = model + d;
      if (model > 1.0) model = 1.0;
      if (model < -1.0) model = -1.0;
      `CHECK_R(w_out, model, 1e-9, "w' = w + dw")
    end
    update(0.3, 1'b0);
    `CHECK_R(w_out, model, 1e-9, "no phi_u, no change")
    update(0.9, 1'b1); update(0.9, 1'b1); update(0.9, 1'b1);
    `CHECK_R(w_out, 1.0, 1e-9, "upper rail")
    `TB_FINISH
  end
endmodule
