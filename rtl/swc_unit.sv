// Behavioural model (analog): signed weight calculation (SWC) unit.
//
// After a functional read one line of the pair has fallen by |w| LSBs:
// BLB for a positive weight, BL for a negative one (1's complement storage).
// A comparator gives the sign S_W = 1 when V_BLB < V_BL. A 2:1 MUX driven by
// S_W passes V_BL (input 1) or V_BLB (input 0) as V_mux, so
// dV_mux = V_PRE - V_mux is proportional to |w|. An op-amp stage then acts as
// a unity-gain follower (S_W = 0) or an inverting amplifier of gain -1
// (S_W = 1), giving the signed weight voltage w = +-dV_mux.
// Combinational; ideal comparator and op-amp.
module swc_unit
  import imc_ann_pkg::*;
(
  input  real  v_bl,
  input  real  v_blb,
  output logic s_w,
  output real  v_mux,
  output real  w
);
  always_comb begin
    s_w   = (v_blb < v_bl);
    v_mux = s_w ? v_bl : v_blb;
    w     = s_w ? -(V_PRE - v_mux) : (V_PRE - v_mux);
  end
endmodule
