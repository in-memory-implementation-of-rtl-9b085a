// Behavioural model (analog): error and sum-of-squares-of-error block of the
// output layer.
//
// For each output l an op-amp subtractor forms e_l = t_l - y_l; two more
// op-amps form the gate voltages V_Gn = V_Tn - e_l and V_Gp = -|V_Tp| - e_l.
// An NMOS and a PMOS with equal transconductance K, each kept in saturation
// by tying drain to source potential, conduct K/2 * e_l^2: the NMOS when
// e_l < 0, the PMOS when e_l > 0, so exactly one of them is on. An op-amp
// sums the currents of all outputs and converts them through R1:
//   V_E = -R1 * sum_l K/2 * e_l^2.
// e is also the local gradient of the output layer. Combinational.
// K, VTN and VTP are this design's choices (K = 2 mA/V^2 makes V_E = -sum e^2).
module error_unit #(
  parameter int  N   = 3,
  parameter real K   = 0.002,
  parameter real R1  = 1000.0,
  parameter real VTN = 0.4,
  parameter real VTP = 0.4
) (
  input  real t   [N],
  input  real y   [N],
  output real e   [N],
  output real v_e
);
  always_comb begin
    real i_tot;
    i_tot = 0.0;
    for (int l = 0; l < N; l++) begin
      real vgn, vsgp;
      e[l] = t[l] - y[l];
      vgn  = VTN - e[l];                 // NMOS gate, source at 0 V
      vsgp = 0.0 - (-VTP - e[l]);        // PMOS source-gate voltage
      if (vgn > VTN)  i_tot = i_tot + 0.5 * K * (vgn - VTN) * (vgn - VTN);
      if (vsgp > VTP) i_tot = i_tot + 0.5 * K * (vsgp - VTP) * (vsgp - VTP);
    end
    v_e = -i_tot * R1;
  end
endmodule
