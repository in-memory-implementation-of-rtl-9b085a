// Behavioural model (analog): backpropagation block of one layer.
//
// For every input column j the currents delta_k * w'_jk of the N signed
// multipliers in that column (one per bank k) are summed on one line and
// turned into a voltage through R: s[j] = R * sum_k i_bp[k*M + j]. The M
// voltages travel back on the MT lines as the weighted gradient sums of the
// previous layer. Combinational. i_bp is indexed bank-major, k*M + j.
module bp_block
  import imc_ann_pkg::*;
#(
  parameter int  M = 4,
  parameter int  N = 5,
  parameter real R = R_CONV
) (
  input  real i_bp [N*M],
  output real s    [M]
);
  always_comb
    for (int j = 0; j < M; j++) begin
      real acc;
      acc = 0.0;
      for (int k = 0; k < N; k++) acc = acc + i_bp[k*M + j];
      s[j] = R * acc;
    end
endmodule
