// Testbench of bp_block: s_j = R * sum over banks k of i_bp[k*M + j].
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_bp_block;
  `TB_COUNTERS
  localparam int M = 4, N = 5;
  real i_bp [N*M];
  real s [M];
  bp_block #(.M(M), .N(N)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int n = 0; n < 20; n++) begin
      real ref_s [M];
      for (int j = 0; j < M; j++) ref_s[j] = 0.0;
      for (int k = 0; k < N; k++)
        for (int j = 0; j < M; j++) begin
          i_bp[k*M + j] = (real'($urandom_range(1000)) - 500.0) * 1e-6;
          ref_s[j] += i_bp[k*M + j] * 1000.0;
        end
      #1;
      for (int j = 0; j < M; j++) `CHECK_R(s[j], ref_s[j], 1e-9, "column sum")
    end
    `TB_FINISH
  end
endmodule
