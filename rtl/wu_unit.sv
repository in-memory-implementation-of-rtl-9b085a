// Behavioural model (analog): weight updation (WU) unit of one synapse.
//
// Three sampling capacitors and switches keep the weight in the analog domain
// for the whole training, so the bit-cell array is read once and written once:
//   phi_s : C_S <- w_in          (signed weight from the SWC unit)
//   phi_b : C_B <- dw            (weight change from the signed multiplier)
//   phi_l : C_L <- V_U = (V_CS + V_CB) / 2   (two equal resistors between the
//                                  two buffered capacitor voltages)
//   phi_u : C_S <- 2 * V_CL      (gain-2 non-inverting amplifier)
// so one phi_b, phi_l, phi_u sequence performs w' = w + dw. w_out is the
// buffered voltage of C_S, the weight w' used by the signed multiplier.
// Every switch closes for one clock period and the capacitor takes the new
// value at the clock edge. The stored weight is clamped to +-W_MAX, standing
// for the amplifier rails (this design's choice); capacitors are ideal.
module wu_unit #(
  parameter real W_MAX = 1.0
) (
  input  logic clk,
  input  logic phi_s,
  input  logic phi_b,
  input  logic phi_l,
  input  logic phi_u,
  input  real  w_in,
  input  real  dw,
  output real  w_out
);
  real v_cs, v_cb, v_cl;

  function automatic real clamp(input real v);
    return (v > W_MAX) ? W_MAX : ((v < -W_MAX) ? -W_MAX : v);
  endfunction

  always_ff @(posedge clk) begin
    if (phi_s)      v_cs <= clamp(w_in);
    else if (phi_u) v_cs <= clamp(2.0 * v_cl);
    if (phi_b) v_cb <= dw;
    if (phi_l) v_cl <= (v_cs + v_cb) / 2.0;
  end

  assign w_out = v_cs;
endmodule
