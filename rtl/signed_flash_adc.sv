// Behavioural model (analog front end) of the 4-bit signed flash ADC that
// writes trained weights back into the bit-cell array.
//
// A resistor ladder runs from +V_REF through ground to -V_REF: R/2 at each
// end and next to ground, R between taps, seven taps on each side. The taps
// sit at +-(i - 1/2) * V_res, V_res = V_REF / 7, i = 1..7. Comparators U1..U7
// fire when the input is above a positive tap, U8..U14 when it is below a
// negative tap. The digital encoder (signed_adc_encoder) turns the two
// thermometer codes into a 4-bit 1's complement word, so the full scale is
// 0111 (+7) to 1000 (-7). V_REF = 0.496 V as in the paper. Combinational.
module signed_flash_adc
  import imc_ann_pkg::*;
#(
  parameter real VREF = V_REF
) (
  input  real        v_in,
  output logic [3:0] code
);
  logic [6:0] cmp_pos, cmp_neg;

  always_comb
    for (int i = 1; i <= 7; i++) begin
      cmp_pos[i-1] = v_in >  (real'(i) - 0.5) * VREF / 7.0;
      cmp_neg[i-1] = v_in < -(real'(i) - 0.5) * VREF / 7.0;
    end

  signed_adc_encoder u_enc (.cmp_pos(cmp_pos), .cmp_neg(cmp_neg), .code(code));
endmodule
