// Behavioural model (analog): four-quadrant multiplier inside the signed
// multiplier unit.
//
// A pre-processing stage divides V_in2 by the reduction factor A and applies
// it as drain-source voltage of a PMOS/NMOS pair whose gates are driven with
// V_in1 shifted by the threshold voltages, so the overdrive equals |V_in1|:
// the NMOS conducts for V_in1 > 0, the PMOS for V_in1 < 0. In the triode
// region the device current is
//   i = beta * (V_ov * V_DS - V_DS * |V_DS| / 2),   V_DS = V_in2 / A
// whose second term is the non-linearity that a larger A reduces. A pair of
// current sources of gain KI (op-amp + OTA) copies the current to the output:
//   i_mult = sign(V_in1) * KI * i.
// beta = A / (KI * R_OUT) normalises the gain so that 1 V x 1 V would give
// 1 mA, i.e. 1 V across R_OUT, without the square term. KI = 250 and
// R_OUT = 1 kOhm follow the paper; A = 10 is this design's choice. The
// worst-case error at 1 V x 1 V is 0.5/A V (50 mV at A = 10, 5 mV at
// A = 100), the same as the paper reports for its circuit over A = 10..100.
// Combinational; output in amperes.
module fq_multiplier #(
  parameter real A     = 10.0,
  parameter real KI    = 250.0,
  parameter real R_OUT = 1000.0
) (
  input  real v_in1,
  input  real v_in2,
  output real i_mult
);
  localparam real BETA = A / (KI * R_OUT);
  real vds, vov, i_dev;

  always_comb begin
    vds    = v_in2 / A;
    vov    = (v_in1 < 0.0) ? -v_in1 : v_in1;
    i_dev  = BETA * (vov * vds - 0.5 * vds * ((vds < 0.0) ? -vds : vds));
    i_mult = (v_in1 < 0.0) ? -KI * i_dev : KI * i_dev;
  end
endmodule
