// Behavioural model (analog): bit-line pair of one column during the
// multi-row functional read.
//
// The pair is precharged to V_PRE while pre is high. Afterwards, in every
// clock period (one period = T_0) each enabled weight word line wl[i]
// discharges one line of the pair by DV_LSB: BL if bits[i] is 0, BLB if it is 1.
// With word line i held for 2^i periods the drops become
//   dV_BL  = DV_LSB * sum 2^i * ~b_i   (1's complement of the stored word)
//   dV_BLB = DV_LSB * sum 2^i *  b_i   (the stored word)
// which is the linear discharge law of a functional read for T_i << R_BL C_BL.
// A line cannot fall below 0 V. The discharge step DV_LSB is this design's
// choice (one LSB of the signed flash ADC, so a weight read and written back
// keeps its code). Outputs change on the clock edge.
module bitline_fr
#(
  parameter int  BW     = 4,
  parameter real DV_LSB = imc_ann_pkg::V_LSB
) (
  input  logic          clk,
  input  logic          pre,
  input  logic [BW-1:0] wl,
  input  logic [BW-1:0] bits,
  output real           v_bl,
  output real           v_blb
);
  always_ff @(posedge clk) begin
    if (pre) begin
      v_bl  <= imc_ann_pkg::V_PRE;
      v_blb <= imc_ann_pkg::V_PRE;
    end else begin
      real bl, blb;
      bl  = v_bl;
      blb = v_blb;
      for (int i = 0; i < BW; i++)
        if (wl[i]) begin
          if (bits[i]) blb = blb - DV_LSB;
          else         bl  = bl  - DV_LSB;
        end
      v_bl  <= (bl  < 0.0) ? 0.0 : bl;
      v_blb <= (blb < 0.0) ? 0.0 : blb;
    end
  end
endmodule
