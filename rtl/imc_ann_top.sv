// Top level: an on-chip trainable in-memory multilayer perceptron with
// N0 inputs, one hidden ReLU layer of N1 neurons and N2 outputs (4-5-3 for
// the Iris classifier).
//
// Blocks and wiring:
//   fr_wl_driver   shared FR row decoder: precharge and binary-weighted word
//                  line pulses for the weight rows of both arrays
//   ann_controller control signal block: S[1:0], switch phases, sample and
//                  epoch counting, early stop, write-back
//   u_l1           hidden layer (M = N0, N = N1, ReLU)
//   u_l2           output layer (M = N1, N = N2); its activation function, a
//                  softmax with its own ADC and DAC, is outside this module:
//                  h_out leaves, y_in comes back
//   error_unit     e_l = t_l - y_l and V_E = -R1 K/2 sum e_l^2
//   error_monitor  epoch error trend for the control block
// Forward lines: x -> u_l1 -> a1 -> u_l2. Backward lines: e -> u_l2 (as its
// local gradient), u_l2.s_out -> u_l1 (gradient sums). The hidden layer's own
// s_out would go to a previous layer; here it is left open.
//
// Digital side: mem_* is the conventional row port of the array selected by
// mem_layer (0 = hidden, 1 = output); weights are loaded through it before
// start. Inputs x and targets t must be applied for the sample named by
// sample_idx from the LOAD cycle on and held until the sample's weight
// update (training) or result_valid (inference). Timing per training sample:
// 1 + XI*FF_CYC + ERR_CYC + XI*BP_CYC + 3 cycles (= 14 at the defaults).
module imc_ann_top
  import imc_ann_pkg::*;
#(
  parameter int  N0    = 4,
  parameter int  N1    = 5,
  parameter int  N2    = 3,
  parameter int  P     = 500,
  parameter int  L     = 120,
  parameter int  N_ROW = 16,
  parameter real ETA   = 0.1,
  localparam int NCMAX = (N0*N1 > N1*N2) ? N0*N1 : N1*N2,
  localparam int WBW   = $clog2(NCMAX)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     train,
  input  logic                     stop_en,
  input  real                      x     [N0],
  input  real                      t     [N2],
  input  real                      y_in  [N2],
  output real                      h_out [N2],
  output real                      a_hid [N1],
  output real                      v_e,
  output real                      epoch_err,
  input  logic                     mem_layer,
  input  logic                     mem_we,
  input  logic [$clog2(N_ROW)-1:0] mem_row,
  input  logic [NCMAX-1:0]         mem_wdata,
  output logic [NCMAX-1:0]         mem_rdata,
  output sm_sel_e                  sel_o,
  output logic                     wb_we_o,
  output logic [15:0]              sample_idx,
  output logic [15:0]              epoch,
  output logic                     result_valid,
  output logic                     stopped_early,
  output logic                     busy,
  output logic                     done
);
  localparam int XI = 2;

  logic          fr_start, fr_done, pre;
  logic [BW-1:0] wl;
  sm_sel_e       sel;
  logic          phi_s, phi_b, phi_l, phi_u, err_sample, epoch_end, err_nd, wb_we;
  logic [XI-1:0] phi_out, phi_dl;
  logic [WBW-1:0] wb_col;
  logic [3:0]    code1, code2;
  logic [N0*N1-1:0] rd1;
  logic [N1*N2-1:0] rd2;

  real a1 [N1], h1 [N1], d1 [N1], s1 [N0], w1 [N0*N1], g1 [N1];
  real a2 [N2], h2 [N2], d2 [N2], s2 [N1], w2 [N1*N2];
  real e  [N2];
  real zero1 [N1];

  fr_wl_driver #(.BW(BW)) u_fr (.clk, .rst_n, .start(fr_start), .pre, .wl, .done(fr_done));

  ann_controller #(.XI(XI), .P(P), .L(L), .NCOL_MAX(NCMAX)) u_ctrl (
    .clk, .rst_n, .start, .train, .stop_en, .err_not_decr(err_nd), .fr_done, .fr_start,
    .sel, .phi_s, .phi_b, .phi_l, .phi_u, .phi_out, .phi_dl, .err_sample, .epoch_end,
    .wb_we, .wb_col, .sample_idx, .epoch, .result_valid, .stopped_early, .busy, .done);

  always_comb for (int k = 0; k < N1; k++) begin
    zero1[k] = 0.0;
    g1[k]    = s2[k];
  end

  ann_layer #(.M(N0), .N(N1), .RELU(1'b1), .N_ROW(N_ROW), .ETA(ETA), .WBW(WBW)) u_l1 (
    .clk, .pre, .wl, .sel, .phi_s, .phi_b, .phi_l, .phi_u,
    .phi_out(phi_out[0]), .phi_dl(phi_dl[0]),
    .x, .g_in(g1), .a_ext(zero1), .a(a1), .h(h1), .delta(d1), .s_out(s1), .w_mon(w1),
    .wb_we, .wb_col, .wb_code(code1),
    .row_we(mem_we && !mem_layer), .row_addr(mem_row),
    .row_wdata(mem_wdata[N0*N1-1:0]), .row_rdata(rd1));

  ann_layer #(.M(N1), .N(N2), .RELU(1'b0), .N_ROW(N_ROW), .ETA(ETA), .WBW(WBW)) u_l2 (
    .clk, .pre, .wl, .sel, .phi_s, .phi_b, .phi_l, .phi_u,
    .phi_out(phi_out[1]), .phi_dl(phi_dl[1]),
    .x(a1), .g_in(e), .a_ext(y_in), .a(a2), .h(h2), .delta(d2), .s_out(s2), .w_mon(w2),
    .wb_we, .wb_col, .wb_code(code2),
    .row_we(mem_we && mem_layer), .row_addr(mem_row),
    .row_wdata(mem_wdata[N1*N2-1:0]), .row_rdata(rd2));

  error_unit #(.N(N2)) u_err (.t, .y(y_in), .e, .v_e);

  error_monitor u_mon (.clk, .rst_n, .sample(err_sample), .epoch_end, .v_e,
                       .not_decreasing(err_nd), .epoch_err);

  assign h_out     = h2;
  assign a_hid     = a1;
  assign sel_o     = sel;
  assign wb_we_o   = wb_we;
  assign mem_rdata = mem_layer ? NCMAX'(rd2) : NCMAX'(rd1);
endmodule
