// Behavioural model (analog): error watch of the control signal block.
//
// Training stops once the network error has stopped decreasing. The error
// voltage V_E of each training sample is added (as |V_E|) when sample is
// high; at epoch_end the epoch total becomes the reference for the next
// epoch. not_decreasing is valid during the epoch_end cycle: it is high when
// the epoch just finished has an error no smaller than the one before it
// (never after the first epoch). epoch_err is the total of the last finished
// epoch. Comparing whole-epoch totals is this design's choice: one sample's
// error rises and falls with the sample itself.
module error_monitor (
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  input  logic epoch_end,
  input  real  v_e,
  output logic not_decreasing,
  output real  epoch_err
);
  real  acc;
  logic have_prev;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      acc       <= 0.0;
      epoch_err <= 0.0;
      have_prev <= 1'b0;
    end else if (epoch_end) begin
      epoch_err <= acc;
      acc       <= 0.0;
      have_prev <= 1'b1;
    end else if (sample) begin
      acc <= acc + ((v_e < 0.0) ? -v_e : v_e);
    end

  assign not_decreasing = have_prev && (acc >= epoch_err);
endmodule
