// Testbench of error_monitor: epoch totals of |V_E|, and the not-decreasing
// flag for a falling, a rising and an equal epoch error.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_error_monitor;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, sample = 0, epoch_end = 0;
  always #5 clk = ~clk;
  real v_e = 0.0, epoch_err;
  logic not_decreasing;
  error_monitor dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  task automatic epoch(input real per_sample, input int n, input bit exp_nd, input string msg);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); sample = 1; v_e = (i % 2) ? -per_sample : per_sample;
    end
    @(negedge clk); sample = 0; epoch_end = 1;
    #1 `CHECK(not_decreasing == exp_nd, msg)
    @(negedge clk); epoch_end = 0;
    `CHECK_R(epoch_err, per_sample * n, 1e-9, "epoch total")
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    epoch(0.5, 10, 1'b0, "first epoch never stops");
    epoch(0.4, 10, 1'b0, "falling error");
    epoch(0.3, 10, 1'b0, "falling error again");
    epoch(0.35, 10, 1'b1, "rising error");
    epoch(0.35, 10, 1'b1, "equal error");
    `TB_FINISH
  end
endmodule
