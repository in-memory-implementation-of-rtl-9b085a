// One layer of the in-memory ANN: M inputs, N output neurons.
//
// Structure (one bank of M columns per output neuron k, column c = k*M + j
// holds the weight w_jk from input j):
//   sram_bca        weights in the last BW rows, column-major, 1's complement
//   bitline_fr      one per column: multi-row functional read -> BL/BLB
//   swc_unit        one per column: signed weight voltage
//   wu_unit         one per column: analog weight store and update
//   sm_unit         one per column: product a_j*w', eta*delta_k*a_j or delta_k*w'
//   act_potential   one per neuron: h_k = R * sum_j a_j w'_jk, held
//   relu_unit       one per neuron (RELU = 1): a_k = max(0, h_k), delta_k
//   bp_block        s_j = R * sum_k delta_k w'_jk, back to the previous layer
//   signed_flash_adc  one per layer: weight of column wb_col -> 4-bit code,
//                   written into the array when wb_we is high
// With RELU = 0 (output layer) the activation function lies outside: h goes
// out, a_ext comes back as the layer output, and the local gradient is the
// held incoming value itself (derivative 1).
//
// g_in is the gradient arriving from the next layer (or the output errors);
// phi_dl samples it into a hold, so the local gradients stay valid in the
// weight-update phase when the backpropagation products are switched off.
// That hold is this design's choice; everything else follows the paper's
// block diagram. x, a, h, g_in, s_out are voltages (real).
module ann_layer
  import imc_ann_pkg::*;
#(
  parameter int  M     = 4,
  parameter int  N     = 5,
  parameter bit  RELU  = 1'b1,
  parameter int  N_ROW = 16,
  parameter real ETA   = 0.1,
  parameter int  WBW   = 5          // width of wb_col
) (
  input  logic                     clk,
  // functional read
  input  logic                     pre,
  input  logic [BW-1:0]            wl,
  // control
  input  sm_sel_e                  sel,
  input  logic                     phi_s,
  input  logic                     phi_b,
  input  logic                     phi_l,
  input  logic                     phi_u,
  input  logic                     phi_out,
  input  logic                     phi_dl,
  // analog lines
  input  real                      x     [M],
  input  real                      g_in  [N],
  input  real                      a_ext [N],
  output real                      a     [N],
  output real                      h     [N],
  output real                      delta [N],
  output real                      s_out [M],
  output real                      w_mon [N*M],
  // write-back
  input  logic                     wb_we,
  input  logic [WBW-1:0]           wb_col,
  output logic [3:0]               wb_code,
  // conventional SRAM port
  input  logic                     row_we,
  input  logic [$clog2(N_ROW)-1:0] row_addr,
  input  logic [N*M-1:0]           row_wdata,
  output logic [N*M-1:0]           row_rdata
);
  localparam int NC = N * M;

  logic [BW-1:0] wcell [NC];
  real v_bl [NC], v_blb [NC], w_swc [NC], w_cur [NC], dw [NC];
  real i_act [NC], i_bp [NC];
  real g_hold [N];
  real wb_v;

  sram_bca #(.N_COL(NC), .N_ROW(N_ROW), .BW(BW)) u_bca (
    .clk, .row_we, .row_addr, .row_wdata, .row_rdata,
    .col_we   (wb_we && (32'(wb_col) < NC)),
    .col_addr ($clog2(NC)'(wb_col)),
    .col_wdata(wb_code),
    .wcell);

  for (genvar c = 0; c < NC; c++) begin : g_col
    logic s_w;
    real  v_mux;
    bitline_fr #(.BW(BW)) u_bl (.clk, .pre, .wl, .bits(wcell[c]),
                                .v_bl(v_bl[c]), .v_blb(v_blb[c]));
    swc_unit u_swc (.v_bl(v_bl[c]), .v_blb(v_blb[c]), .s_w, .v_mux, .w(w_swc[c]));
    wu_unit  u_wu  (.clk, .phi_s, .phi_b, .phi_l, .phi_u,
                    .w_in(w_swc[c]), .dw(dw[c]), .w_out(w_cur[c]));
    sm_unit #(.ETA(ETA)) u_sm (.sel, .a(x[c % M]), .w(w_cur[c]), .delta(delta[c / M]),
                               .i_act(i_act[c]), .dw(dw[c]), .i_bp(i_bp[c]));
    assign w_mon[c] = w_cur[c];
  end

  for (genvar k = 0; k < N; k++) begin : g_neuron
    real i_bank [M];
    for (genvar j = 0; j < M; j++) begin : g_in_cur
      assign i_bank[j] = i_act[k*M + j];
    end
    act_potential #(.M(M)) u_ap (.clk, .phi_out, .i_in(i_bank), .h(h[k]));

    always_ff @(posedge clk) if (phi_dl) g_hold[k] <= g_in[k];

    if (RELU) begin : g_relu
      logic dphi;
      relu_unit u_relu (.h(h[k]), .g_in(g_hold[k]), .a(a[k]), .dphi, .delta(delta[k]));
    end else begin : g_ext
      assign a[k]     = a_ext[k];
      assign delta[k] = g_hold[k];
    end
  end

  bp_block #(.M(M), .N(N)) u_bp (.i_bp, .s(s_out));

  always_comb begin
    wb_v = 0.0;
    for (int c = 0; c < NC; c++) if (32'(wb_col) == c) wb_v = w_cur[c];
  end
  signed_flash_adc u_adc (.v_in(wb_v), .code(wb_code));
endmodule
