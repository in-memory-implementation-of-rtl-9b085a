// Digital back end of the 4-bit signed flash ADC.
//
// The front end compares the input with 14 taps of a resistor ladder strung
// from +V_REF to -V_REF. cmp_pos[i-1] is comparator U_i (i = 1..7, high when
// the input is above the i-th positive tap); cmp_neg[i-1] is comparator
// U_(7+i) (high when the input is below the i-th negative tap). Both sets form
// thermometer codes.
//
// b3 is U8 itself: the input is below -V_res/2, so the weight is negative.
// Two 8-to-3 priority encoders (input 0 tied low) turn the thermometer codes
// into magnitudes; b3 enables exactly one of them (the positive one has an
// active-low enable). The negative encoder's outputs pass through NOT gates,
// which yields the 1's complement of the magnitude, the code the bit-cell
// array stores for negative weights. So +3 -> 0011 and -3 -> 1100.
// Purely combinational. The shared output lines of the two encoders are
// written as a multiplexer on b3.
module signed_adc_encoder (
  input  logic [6:0] cmp_pos,
  input  logic [6:0] cmp_neg,
  output logic [3:0] code
);
  function automatic logic [2:0] prio8(input logic [7:0] d, input logic en);
    logic [2:0] r;
    r = 3'd0;
    if (en)
      for (int i = 1; i < 8; i++) if (d[i]) r = 3'(i);
    return r;
  endfunction

  logic       b3;
  logic [2:0] mag_p, mag_n;

  always_comb begin
    b3    = cmp_neg[0];
    mag_p = prio8({cmp_pos, 1'b0}, !b3);
    mag_n = prio8({cmp_neg, 1'b0}, b3);
    code  = b3 ? {1'b1, ~mag_n} : {1'b0, mag_p};
  end
endmodule
