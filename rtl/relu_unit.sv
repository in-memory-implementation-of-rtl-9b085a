// Behavioural model (analog): ReLU activation function and its derivative.
//
// A comparator checks h > 0; its output is the derivative phi'(h) (dphi).
// MUX A1 selects h (input 1) or ground (input 0), giving a = max(0, h).
// MUX A2 selects the weighted gradient sum arriving from the next layer,
// g_in = sum_l delta_l w_kl (input 1), or ground (input 0), giving the local
// gradient delta = phi'(h) * g_in of this neuron. Combinational.
module relu_unit (
  input  real  h,
  input  real  g_in,
  output real  a,
  output logic dphi,
  output real  delta
);
  always_comb begin
    dphi  = (h > 0.0);
    a     = dphi ? h : 0.0;
    delta = dphi ? g_in : 0.0;
  end
endmodule
