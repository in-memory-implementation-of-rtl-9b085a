// Behavioural model (analog): activation potential of one neuron.
//
// The M product currents a_j * w'_jk of the neuron's bank meet on one node;
// their sum flows through R to ground and a unity-gain buffer takes the
// voltage R * sum(i). Switch phi_out samples it on capacitor C, and a second
// buffer presents it as h, held for the backpropagation and weight-update
// phases so the potential never has to be recomputed. Sampling happens at the
// clock edge of the cycle in which phi_out is high.
module act_potential
  import imc_ann_pkg::*;
#(
  parameter int  M = 4,
  parameter real R = R_CONV
) (
  input  logic clk,
  input  logic phi_out,
  input  real  i_in [M],
  output real  h
);
  real v;
  always_comb begin
    v = 0.0;
    for (int j = 0; j < M; j++) v = v + i_in[j];
    v = v * R;
  end
  always_ff @(posedge clk) if (phi_out) h <= v;
endmodule
