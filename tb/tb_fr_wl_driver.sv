// Testbench of fr_wl_driver: one precharge cycle, word line i on for exactly
// 2^i cycles starting together, done after 1 + 8 + 1 cycles, and a second
// read started right after the first.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_fr_wl_driver;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic pre, done;
  logic [3:0] wl;
  fr_wl_driver #(.BW(4)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    int on_cnt [4];
    int first_on [4];
    int pre_cnt, cyc, done_at;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      pre_cnt = 0; done_at = -1;
      for (int i = 0; i < 4; i++) begin on_cnt[i] = 0; first_on[i] = -1; end
      for (cyc = 1; cyc < 20; cyc++) begin
        if (pre) pre_cnt++;
        for (int i = 0; i < 4; i++) if (wl[i]) begin
          on_cnt[i]++;
          if (first_on[i] < 0) first_on[i] = cyc;
        end
        if (done && done_at < 0) done_at = cyc;
        `CHECK(!(pre && wl != 0), "no word line during precharge")
        @(negedge clk);
      end
      `CHECK(pre_cnt == 1, "one precharge cycle")
      for (int i = 0; i < 4; i++) begin
        `CHECK(on_cnt[i] == (1 << i), "binary-weighted pulse width")
        `CHECK(first_on[i] == 2, "word lines rise together")
      end
      `CHECK(done_at == 10, "done after 1 + 8 + 1 cycles")
    end
    `TB_FINISH
  end
endmodule
