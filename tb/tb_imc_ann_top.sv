// End-to-end testbench of imc_ann_top, the 4-5-3 Iris network, with a
// reduced number of epochs (P = 30, L = 120). The bench supplies what sits
// outside the chip: the data (Iris-like synthetic set), the softmax on the
// output potentials and the initial 4-bit weights (random codes -3..3)
// loaded through the row port. It trains, lets the chip write the weights
// back through the ADCs, checks the stored codes against the trained analog
// weights, and runs inference on the training and the test samples.
// A second copy with a zero learning rate and early stopping enabled checks
// the early-stop path (its epoch error cannot decrease). Every mechanism
// (functional read, feed-forward, error sampling, backpropagation, weight
// update, epoch end, write-back with both ADC code signs, ReLU on and off,
// inference results, early stop) is counted and must have happened.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_imc_ann_top;
  import imc_ann_pkg::*;
  `TB_COUNTERS
  `include "iris_like_data.svh"
  localparam int P_RUN = 30;
  localparam int NROW = 16;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, train = 0, stop_en = 0;
  real x [4], t [3], y_in [3], h_out [3], a_hid [5], v_e, epoch_err;
  logic mem_layer = 0, mem_we = 0;
  logic [3:0] mem_row = 0;
  logic [19:0] mem_wdata = 0, mem_rdata;
  sm_sel_e sel_o;
  logic wb_we_o, result_valid, stopped_early, busy, done;
  logic [15:0] sample_idx, epoch;

  imc_ann_top #(.P(P_RUN)) dut (.*);

  // early-stop copy: zero learning rate, stop_en high
  logic start2 = 0, wb2, rv2, se2, busy2, done2;
  real x2 [4], t2 [3], y2 [3], h2 [3], a2 [5], ve2, ee2;
  logic [19:0] rd2;
  sm_sel_e sel2;
  logic [15:0] si2, ep2;
  imc_ann_top #(.P(P_RUN), .ETA(0.0)) dut_es (
    .clk, .rst_n, .start(start2), .train(1'b1), .stop_en(1'b1), .x(x2), .t(t2),
    .y_in(y2), .h_out(h2), .a_hid(a2), .v_e(ve2), .epoch_err(ee2),
    .mem_layer, .mem_we, .mem_row, .mem_wdata, .mem_rdata(rd2), .sel_o(sel2),
    .wb_we_o(wb2), .sample_idx(si2), .epoch(ep2), .result_valid(rv2),
    .stopped_early(se2), .busy(busy2), .done(done2));

  // data source: 0 = training set, 1 = test set
  int src = 0;
  function automatic int cur_label(input int idx);
    return (src == 0) ? iris_tr_y[idx % IRIS_TRAIN] : iris_te_y[idx % IRIS_TEST];
  endfunction
  always_comb begin
    for (int d = 0; d < 4; d++) begin
      x[d]  = (src == 0) ? iris_tr_x[int'(sample_idx) % IRIS_TRAIN][d]
                         : iris_te_x[int'(sample_idx) % IRIS_TEST][d];
      x2[d] = iris_tr_x[int'(si2) % IRIS_TRAIN][d];
    end
    for (int l = 0; l < 3; l++) begin
      t[l]  = (cur_label(int'(sample_idx)) == l) ? 1.0 : 0.0;
      t2[l] = (iris_tr_y[int'(si2) % IRIS_TRAIN] == l) ? 1.0 : 0.0;
    end
  end

  // off-chip softmax on the output potentials, input gain SM_GAIN per volt
  localparam real SM_GAIN = 3.0;
  function automatic void softmax(input real h [3], output real y [3]);
    real m, s;
    m = h[0];
    for (int l = 1; l < 3; l++) if (h[l] > m) m = h[l];
    s = 0.0;
    for (int l = 0; l < 3; l++) begin y[l] = $exp(SM_GAIN * (h[l] - m)); s += y[l]; end
    for (int l = 0; l < 3; l++) y[l] = y[l] / s;
  endfunction
  always_comb softmax(h_out, y_in);
  always_comb softmax(h2, y2);

  function automatic int argmax3(input real h [3]);
    int b = 0;
    for (int l = 1; l < 3; l++) if (h[l] > h[b]) b = l;
    return b;
  endfunction

  // mechanism counters
  int n_fr, n_ff, n_err, n_bp, n_wu, n_epoch, n_wb, n_adc_neg, n_adc_pos, n_res;
  int n_relu_on, n_relu_off, n_es;
  int last_ok, last_n, inf_ok, inf_n;
  real first_epoch_err = -1.0, last_epoch_err;
  int  exp_code [2][20];
  always @(posedge clk) begin
    if (dut.fr_done) n_fr++;
    if (sel_o == SM_FF) n_ff++;
    if (sel_o == SM_BP) n_bp++;
    if (sel_o == SM_WU) n_wu++;
    if (dut.err_sample) begin
      n_err++;
      if (int'(epoch) == P_RUN - 1) begin
        last_n++;
        if (argmax3(h_out) == cur_label(int'(sample_idx))) last_ok++;
      end
    end
    if (dut.epoch_end) n_epoch++;
    if (n_epoch == 1 && first_epoch_err < 0.0 && !dut.epoch_end) first_epoch_err = epoch_err;
    if (wb_we_o) begin
      n_wb++;
      for (int ly = 0; ly < 2; ly++) begin
        logic [3:0] c;
        c = (ly == 0) ? dut.code1 : dut.code2;
        if (c[3] && c != 4'hF) n_adc_neg++;
        if (!c[3] && c != 4'h0) n_adc_pos++;
        exp_code[ly][dut.wb_col] = dec(c);
      end
    end
    if (result_valid) begin
      n_res++;
      if (src == 0 || int'(sample_idx) < IRIS_TEST) begin
        inf_n++;
        if (argmax3(h_out) == cur_label(int'(sample_idx))) inf_ok++;
      end
      for (int k = 0; k < 5; k++)
        if (a_hid[k] > 0.0) n_relu_on++; else n_relu_off++;
    end
    if (se2) n_es++;
  end

  initial begin #50_000_000; failures++; $display("watchdog"); `TB_FINISH end

  function automatic logic [3:0] enc(input int v);
    return (v < 0) ? ~4'(-v) : 4'(v);
  endfunction
  function automatic int dec(input logic [3:0] c);
    logic [3:0] m;
    m = ~c;
    if (c[3]) return -int'(m);
    return int'(c);
  endfunction
  function automatic int quant(input real w);
    real r = w / V_LSB;
    int q = (r >= 0.0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
    return (q > 7) ? 7 : (q < -7) ? -7 : q;
  endfunction

  task automatic run(input logic tr);
    @(negedge clk); train = tr; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    int code [2][20];
    int ok_train, ok_test;
    iris_generate(64'd2024);
    // initial weights, loaded into both copies through the row port
    for (int ly = 0; ly < 2; ly++)
      for (int c = 0; c < 20; c++) code[ly][c] = int'($urandom_range(6)) - 3;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ly = 0; ly < 2; ly++)
      for (int i = 0; i < 4; i++) begin
        @(negedge clk);
        mem_layer = ly[0]; mem_we = 1; mem_row = 4'(NROW - 1 - i);
        for (int c = 0; c < 20; c++) mem_wdata[c] = enc(code[ly][c])[i];
      end
    @(negedge clk); mem_we = 0;

    // training
    fork
      begin @(negedge clk); start2 = 1; @(negedge clk); start2 = 0; end
      run(1'b1);
    join
    last_epoch_err = epoch_err;
    `CHECK(int'(epoch) == P_RUN - 1 && !stopped_early, "training ran all epochs")
    `CHECK(last_epoch_err < first_epoch_err, "epoch error decreased")
    $display("INFO epoch error first %f last %f, last-epoch train accuracy %0d/%0d",
             first_epoch_err, last_epoch_err, last_ok, last_n);
    `CHECK(last_ok * 100 >= 90 * last_n, "training accuracy before write-back")

    // stored codes equal the quantised trained weights
    for (int ly = 0; ly < 2; ly++)
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); mem_layer = ly[0]; mem_row = 4'(NROW - 1 - i);
        @(negedge clk);
        for (int c = 0; c < ((ly == 0) ? 20 : 15); c++)
          `CHECK(mem_rdata[c] == enc(exp_code[ly][c])[i], "written-back code bit")
      end
    for (int c = 0; c < 20; c++)
      `CHECK(exp_code[0][c] == quant(dut.u_l1.w_mon[c]), "ADC code matches analog hidden weight")
    for (int c = 0; c < 15; c++)
      `CHECK(exp_code[1][c] == quant(dut.u_l2.w_mon[c]), "ADC code matches analog output weight")

    // inference with the written-back weights
    src = 0; inf_ok = 0; inf_n = 0;
    run(1'b0);
    ok_train = inf_ok;
    `CHECK(inf_n == IRIS_TRAIN, "inference over all training samples")
    src = 1; inf_ok = 0; inf_n = 0;
    run(1'b0);
    ok_test = inf_ok;
    `CHECK(inf_n == IRIS_TEST, "inference over the test samples")
    $display("INFO inference accuracy after write-back: train %0d/%0d, test %0d/%0d",
             ok_train, IRIS_TRAIN, ok_test, IRIS_TEST);
    `CHECK(ok_train * 100 >= 85 * IRIS_TRAIN, "train accuracy after write-back")
    `CHECK(ok_test * 100 >= 80 * IRIS_TEST, "test accuracy after write-back")

    // early-stop copy
    wait (done2);
    `CHECK(se2, "zero learning rate run stopped early")
    `CHECK(int'(ep2) == 1, "early stop after the second epoch")

    $display("INFO counts fr=%0d ff=%0d err=%0d bp=%0d wu=%0d epoch=%0d wb=%0d adc-=%0d adc+=%0d res=%0d relu_on=%0d relu_off=%0d es=%0d",
             n_fr, n_ff, n_err, n_bp, n_wu, n_epoch, n_wb, n_adc_neg, n_adc_pos, n_res,
             n_relu_on, n_relu_off, n_es);
    `CHECK(n_fr == 3, "functional read once per run")
    `CHECK(n_ff > 0, "feed-forward happened")
    `CHECK(n_err == P_RUN * IRIS_TRAIN, "error sampled once per training sample")
    `CHECK(n_bp > 0, "backpropagation happened")
    `CHECK(n_wu == 3 * P_RUN * IRIS_TRAIN, "weight update phases once per sample")
    `CHECK(n_epoch == P_RUN, "epoch end once per epoch")
    `CHECK(n_wb == 20, "write-back over all columns")
    `CHECK(n_adc_neg > 0, "negative ADC codes")
    `CHECK(n_adc_pos > 0, "positive ADC codes")
    `CHECK(n_res == 2 * IRIS_TRAIN, "inference results")
    `CHECK(n_relu_on > 0, "ReLU passed a positive potential")
    `CHECK(n_relu_off > 0, "ReLU blocked a negative potential")
    `CHECK(n_es > 0, "early stop happened")
    `TB_FINISH
  end
endmodule
