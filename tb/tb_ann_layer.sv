// Testbench of ann_layer (M = 2 inputs, N = 2 neurons, ReLU): the bench
// plays the control block. It loads 1's complement weights through the row
// port, runs a functional read and phi_s, then checks the signed weights,
// feed-forward potentials and outputs, the gradient sums sent back, one
// weight update, and the ADC write-back with a second read. An output-layer
// instance (RELU = 0) checks the external activation path.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_ann_layer;
  import imc_ann_pkg::*;
  `TB_COUNTERS
  localparam int M = 2, N = 2, NC = 4, NR = 8;
  localparam real LSB = 0.496 / 7.0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic pre = 0, phi_s = 0, phi_b = 0, phi_l = 0, phi_u = 0, phi_out = 0, phi_dl = 0;
  logic [3:0] wl = 0;
  sm_sel_e sel = SM_IDLE;
  real x [M], g_in [N], a_ext [N], a [N], h [N], delta [N], s_out [M], w_mon [NC];
  real a2 [N], h2 [N], delta2 [N], s_out2 [M], w_mon2 [NC];
  logic wb_we = 0;
  logic [2:0] wb_col = 0;
  logic [3:0] wb_code, wb_code2;
  logic row_we = 0;
  logic [2:0] row_addr = 0;
  logic [NC-1:0] row_wdata = 0, row_rdata, row_rdata2;

  ann_layer #(.M(M), .N(N), .RELU(1'b1), .N_ROW(NR), .ETA(0.1), .WBW(3)) dut (.*);
  ann_layer #(.M(M), .N(N), .RELU(1'b0), .N_ROW(NR), .ETA(0.1), .WBW(3)) dut_out (
    .clk, .pre, .wl, .sel, .phi_s, .phi_b, .phi_l, .phi_u, .phi_out, .phi_dl,
    .x, .g_in, .a_ext, .a(a2), .h(h2), .delta(delta2), .s_out(s_out2), .w_mon(w_mon2),
    .wb_we, .wb_col, .wb_code(wb_code2), .row_we, .row_addr, .row_wdata, .row_rdata(row_rdata2));

  // weight values (column c = k*M + j): neuron 0 positive, neuron 1 negative
  int wval [NC] = '{3, 5, -4, -2};

  function automatic logic [3:0] enc(input int v);
    return (v < 0) ? ~4'(-v) : 4'(v);
  endfunction

  task automatic fr_read();
    @(negedge clk); pre = 1;
    @(negedge clk); pre = 0;
    for (int c = 0; c < 8; c++) begin
      for (int i = 0; i < 4; i++) wl[i] = (c < (1 << i));
      @(negedge clk);
    end
    wl = 0;
    @(negedge clk); phi_s = 1;
    @(negedge clk); phi_s = 0;
  endtask

  initial begin #100000; failures++; $display("watchdog"); `TB_FINISH end

  initial begin
    real w [NC], wn [NC], hr [N], dl [N];
    // load the weight rows: bit i of every column in row NR-1-i
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); row_we = 1; row_addr = 3'(NR - 1 - i);
      for (int c = 0; c < NC; c++) row_wdata[c] = enc(wval[c])[i];
    end
    @(negedge clk); row_we = 0;
    fr_read();
    for (int c = 0; c < NC; c++) begin
      w[c] = wval[c] * LSB;
      `CHECK_R(w_mon[c], w[c], 1e-6, "signed weight after functional read")
    end
    // feed-forward
    x[0] = 0.8; x[1] = 0.6;
    for (int k = 0; k < N; k++) a_ext[k] = 0.25 * (k + 1);
    @(negedge clk); sel = SM_FF;
    @(negedge clk); phi_out = 1;
    @(negedge clk); phi_out = 0; sel = SM_IDLE;
    for (int k = 0; k < N; k++) begin
      hr[k] = x[0] * w[k*M] + x[1] * w[k*M + 1];
      `CHECK_R(h[k], hr[k], 0.0501 * (x[0]*x[0] + x[1]*x[1]) + 1e-6, "activation potential")
      `CHECK_R(a[k], (h[k] > 0.0) ? h[k] : 0.0, 1e-12, "ReLU output")
      `CHECK_R(a2[k], a_ext[k], 1e-12, "output layer takes external activation")
    end
    `CHECK(h[0] > 0.0 && h[1] < 0.0, "one neuron on, one off")
    // backpropagation: hold the incoming gradients, S = 11
    g_in[0] = 0.5; g_in[1] = -0.7;
    @(negedge clk); phi_dl = 1;
    @(negedge clk); phi_dl = 0; sel = SM_BP;
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      dl[k] = (hr[k] > 0.0) ? g_in[k] : 0.0;
      `CHECK_R(delta[k], dl[k], 1e-12, "local gradient")
      `CHECK_R(delta2[k], g_in[k], 1e-12, "output layer gradient is the held error")
    end
    for (int j = 0; j < M; j++)
      `CHECK_R(s_out[j], dl[0] * w[j] + dl[1] * w[M + j], 0.06 * 0.5 * 0.5 + 1e-6, "gradient sum to previous layer")
    // weight update, S = 10, gradients still held
    g_in[0] = 0.0; g_in[1] = 0.0;
    sel = SM_WU;
    @(negedge clk); phi_b = 1;
    @(negedge clk); phi_b = 0; phi_l = 1;
    @(negedge clk); phi_l = 0; phi_u = 1;
    @(negedge clk); phi_u = 0; sel = SM_IDLE;
    for (int c = 0; c < NC; c++) begin
      wn[c] = w[c] + 0.1 * dl[c / M] * x[c % M];
      `CHECK_R(w_mon[c], wn[c], 0.1 * 0.05 * 0.5 * 0.5 + 1e-6, "updated weight")
    end
    `CHECK(w_mon[0] > w[0], "positive gradient raises the weight")
    // write-back through the signed flash ADC, then read again
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); wb_col = 3'(c); wb_we = 1;
    end
    @(negedge clk); wb_we = 0;
    fr_read();
    for (int c = 0; c < NC; c++) begin
      int q;
      real r;
      r = wn[c] / LSB;
      q = (r >= 0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
      `CHECK_R(w_mon[c], q * LSB, 1e-6, "weight after write-back and re-read")
    end
    `TB_FINISH
  end
endmodule
