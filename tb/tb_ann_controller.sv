// Testbench of ann_controller (XI = 2 layers, P = 3 epochs, L = 2 samples,
// 4 columns): counts every phase pulse of a training run against the
// schedule, checks the S[1:0] sequence, the order of the switch phases and
// the 14-cycle length of one
// training sample, the write-back sweep, early stop and inference mode.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_ann_controller;
  import imc_ann_pkg::*;
  `TB_COUNTERS
  localparam int XI = 2, P = 3, L = 2, NC = 4;
  logic clk = 0, rst_n = 0, start = 0, train = 1, stop_en = 0, err_not_decr = 0, fr_done = 0;
  always #5 clk = ~clk;
  logic fr_start, phi_s, phi_b, phi_l, phi_u, err_sample, epoch_end, wb_we;
  logic result_valid, stopped_early, busy, done;
  logic [XI-1:0] phi_out, phi_dl;
  logic [1:0] wb_col;
  logic [15:0] sample_idx, epoch;
  sm_sel_e sel;

  ann_controller #(.XI(XI), .P(P), .L(L), .NCOL_MAX(NC), .FF_CYC(2), .ERR_CYC(2), .BP_CYC(2)) dut (.*);

  // functional read model: done 4 cycles after fr_start
  initial forever begin
    @(posedge clk iff fr_start);
    repeat (3) @(posedge clk);
    #1 fr_done = 1;
    @(posedge clk); #1 fr_done = 0;
  end

  int n_fr, n_s, n_b, n_l, n_u, n_err, n_ep, n_wb, n_res;
  int n_out [XI], n_dl [XI];
  string seq, ph;
  always @(posedge clk) if (rst_n) begin
    n_fr += fr_start; n_s += phi_s; n_b += phi_b; n_l += phi_l; n_u += phi_u;
    n_err += err_sample; n_ep += epoch_end; n_wb += wb_we; n_res += result_valid;
    for (int k = 0; k < XI; k++) begin n_out[k] += phi_out[k]; n_dl[k] += phi_dl[k]; end
    if (busy && epoch == 0 && sample_idx == 0) begin
      seq = {seq, $sformatf("%0d", sel)};
      ph  = {ph, phi_s ? "S" : "", phi_out[0] ? "O" : "", phi_out[1] ? "P" : "",
             err_sample ? "E" : "", phi_dl[1] ? "D" : "", phi_dl[0] ? "d" : "",
             phi_b ? "B" : "", phi_l ? "L" : "", phi_u ? "U" : ""};
    end
    if (wb_we) `CHECK(32'(wb_col) == n_wb - 1, "write-back column order")
  end

  task automatic clear();
    n_fr = 0; n_s = 0; n_b = 0; n_l = 0; n_u = 0; n_err = 0; n_ep = 0; n_wb = 0; n_res = 0;
    for (int k = 0; k < XI; k++) begin n_out[k] = 0; n_dl[k] = 0; end
    seq = "";
    ph  = "";
  endtask

  task automatic run(input bit tr, input bit se, input bit nd, output int cycles);
    @(negedge clk); train = tr; stop_en = se; err_not_decr = nd; start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin #200000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    int cyc;
    clear();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- full training run
    clear();
    run(1'b1, 1'b0, 1'b0, cyc);
    `CHECK(n_fr == 1 && n_s == 1, "one functional read, one phi_s")
    for (int k = 0; k < XI; k++) begin
      `CHECK(n_out[k] == P * L, "phi_out per layer per sample")
    end
    `CHECK(n_dl[1] == P * L && n_dl[0] == P * L, "gradient holds per sample")
    `CHECK(n_b == P * L && n_l == P * L && n_u == P * L, "one update per sample")
    `CHECK(n_err == P * L, "error sampled per sample")
    `CHECK(n_ep == P, "epoch_end per epoch")
    `CHECK(n_wb == NC, "write-back sweep")
    `CHECK(!stopped_early, "no early stop")
    // first sample: FR wait and SWC (0s), LOAD 0, FF 1111, ERR 00, BP 3333, WU 222
    `CHECK(seq == "0000001111003333222", {"S sequence ", seq})
    // phi_s, phi_out hidden/output, error sample with output gradient hold,
    // hidden gradient hold, then the update phases B, L, U
    `CHECK(ph == "SOPEDdBLU", {"phase order ", ph})
    // 6 cycles of start, read and done; 14 per training sample; 1 per epoch end
    `CHECK(cyc == 6 + P * L * 14 + P + NC, $sformatf("run length %0d", cyc))
    // ---- early stop after the first epoch
    clear();
    run(1'b1, 1'b1, 1'b1, cyc);
    `CHECK(stopped_early && epoch == 0, "early stop at first epoch end")
    `CHECK(n_ep == 1 && n_b == L && n_wb == NC, "early stop then write-back")
    // ---- inference
    clear();
    run(1'b0, 1'b0, 1'b0, cyc);
    `CHECK(n_res == L && n_b == 0 && n_wb == 0 && n_err == 0, "inference: feed-forward only")
    `CHECK(n_out[0] == L && n_out[1] == L, "inference phi_out")
    `CHECK(cyc == 6 + L * (1 + 4 + 1), $sformatf("inference length %0d", cyc))
    `TB_FINISH
  end
endmodule
