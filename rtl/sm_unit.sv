// Behavioural model (analog): signed multiplier (SM) unit of one synapse.
//
// Two 2:1 MUXes choose the multiplier inputs from the control word S[1:0]:
//   V_in1 = S[0] ? w' : a        V_in2 = S[1] ? delta : a
// and a 1:4 DEMUX on S routes the product current:
//   S=01: a * w'     -> i_act  (activation potential of the neuron)
//   S=10: delta * a  -> through R_CONV and a gain of ETA -> dw (WU unit)
//   S=11: delta * w' -> i_bp   (backpropagation block)
//   S=00: nowhere; all outputs are 0.
// a is the synapse input a_j^[K-1], w' the weight held in the WU unit and
// delta the local gradient delta_k^[K] of the neuron. The learning rate sits
// only in the weight-update path; the gradient sent back is not scaled.
// Combinational.
module sm_unit
  import imc_ann_pkg::*;
#(
  parameter real ETA = 0.1,
  parameter real A   = 10.0
) (
  input  sm_sel_e sel,
  input  real     a,
  input  real     w,
  input  real     delta,
  output real     i_act,
  output real     dw,
  output real     i_bp
);
  real v1, v2, i;

  fq_multiplier #(.A(A)) u_mul (.v_in1(v1), .v_in2(v2), .i_mult(i));

  always_comb begin
    v1    = sel[0] ? w : a;
    v2    = sel[1] ? delta : a;
    i_act = (sel == SM_FF) ? i : 0.0;
    dw    = (sel == SM_WU) ? ETA * i * R_CONV : 0.0;
    i_bp  = (sel == SM_BP) ? i : 0.0;
  end
endmodule
