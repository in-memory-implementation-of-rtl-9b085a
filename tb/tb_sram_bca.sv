// Testbench of sram_bca: row writes and registered row reads against a
// reference array, column (ADC) writes into the weight rows, the b0-at-the-
// bottom layout seen on wcell, and column-over-row priority.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_sram_bca;
  `TB_COUNTERS
  localparam int NC = 20, NR = 16, BW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic row_we = 0, col_we = 0;
  logic [3:0] row_addr = 0;
  logic [NC-1:0] row_wdata = 0, row_rdata;
  logic [4:0] col_addr = 0;
  logic [BW-1:0] col_wdata = 0;
  logic [BW-1:0] wcell [NC];
  logic [NC-1:0] ref_mem [NR];

  sram_bca #(.N_COL(NC), .N_ROW(NR), .BW(BW)) dut (.*);

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    for (int r = 0; r < NR; r++) begin
      @(negedge clk); row_we = 1; row_addr = 4'(r); row_wdata = NC'($urandom); ref_mem[r] = row_wdata;
    end
    @(negedge clk); row_we = 0;
    for (int r = 0; r < NR; r++) begin
      @(negedge clk); row_addr = 4'(r);
      @(negedge clk); `CHECK(row_rdata == ref_mem[r], "row read back")
    end
    // weight cells: bit i of column c sits in row NR-1-i
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < BW; i++) `CHECK(wcell[c][i] == ref_mem[NR-1-i][c], "wcell layout")
    // ADC column writes
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); col_we = 1; col_addr = 5'(c); col_wdata = 4'(c * 7 + 3);
      for (int i = 0; i < BW; i++) ref_mem[NR-1-i][c] = col_wdata[i];
    end
    @(negedge clk); col_we = 0;
    for (int c = 0; c < NC; c++) `CHECK(wcell[c] == 4'(c * 7 + 3), "column write")
    for (int r = NR - BW; r < NR; r++) begin
      @(negedge clk); row_addr = 4'(r);
      @(negedge clk); `CHECK(row_rdata == ref_mem[r], "weight row via row port")
    end
    // same cell written by both ports in one cycle: column port wins
    @(negedge clk); row_we = 1; row_addr = 4'(NR-1); row_wdata = '0;
    col_we = 1; col_addr = 5'd3; col_wdata = 4'hF;
    @(negedge clk); row_we = 0; col_we = 0;
    `CHECK(wcell[3][0] == 1'b1 && wcell[4][0] == 1'b0, "column write priority")
    `TB_FINISH
  end
endmodule
