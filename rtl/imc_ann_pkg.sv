// Shared types and constants of the in-memory ANN.
//
// The signed multiplier (SM) of every synapse is steered by a 2-bit control
// word S[1:0]; the encoding below is the one the design uses everywhere:
//   01 feed-forward   a * w'        -> activation potential
//   10 weight update  eta * delta * a -> weight updation unit
//   11 backprop       delta * w'    -> backpropagation block
//   00 idle           product routed nowhere
// Weights are B_W = 4 bit words in 1's complement (b3 = sign), stored
// column-major in the last B_W rows of each bit-cell array.
package imc_ann_pkg;
  localparam int BW = 4;                      // bits per weight
  localparam real V_PRE = 1.0;                // bit-line precharge voltage, V
  localparam real V_REF = 0.496;              // signed flash ADC reference, V
  localparam real V_LSB = V_REF / 7.0;        // one weight LSB as a voltage, V
  localparam real R_CONV = 1000.0;            // current-to-voltage resistors, Ohm

  typedef enum logic [1:0] {
    SM_IDLE = 2'b00,
    SM_FF   = 2'b01,
    SM_WU   = 2'b10,
    SM_BP   = 2'b11
  } sm_sel_e;
endpackage
