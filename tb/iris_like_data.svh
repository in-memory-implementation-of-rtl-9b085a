// Iris-like data set generator for the testbenches. Three classes of four
// features (sepal length/width, petal length/width in cm) are drawn from
// independent Gaussians with the per-class means and standard deviations of
// the classic Iris flower data, using a fixed linear congruential generator
// and the Box-Muller transform, so every run sees the same 150 samples.
// Features are min/max scaled to -1..+1 V (ranges of the original data,
// clipped): centred inputs let the bias-free network separate the classes. 120 training samples (40 per class) and 30 test samples (10 per
// class) are produced, classes interleaved (sample i has class i % 3).
// These are synthetic records with Iris statistics, not the original ones.

localparam int IRIS_TRAIN = 120;
localparam int IRIS_TEST  = 30;

real iris_tr_x [IRIS_TRAIN][4];
int  iris_tr_y [IRIS_TRAIN];
real iris_te_x [IRIS_TEST][4];
int  iris_te_y [IRIS_TEST];

function automatic real iris_uniform(inout longint unsigned s);
  s = s * 64'd6364136223846793005 + 64'd1442695040888963407;
  return (real'(s[63:11]) + 0.5) / 9007199254740992.0;
endfunction

function automatic void iris_generate(input longint unsigned seed);
  real mean [3][4] = '{'{5.006, 3.428, 1.462, 0.246},
                       '{5.936, 2.770, 4.260, 1.326},
                       '{6.588, 2.974, 5.552, 2.026}};
  real sd   [3][4] = '{'{0.352, 0.379, 0.174, 0.105},
                       '{0.516, 0.314, 0.470, 0.198},
                       '{0.636, 0.322, 0.552, 0.275}};
  real lo [4] = '{4.3, 2.0, 1.0, 0.1};
  real hi [4] = '{7.9, 4.4, 6.9, 2.5};
  longint unsigned s = seed;
  for (int n = 0; n < IRIS_TRAIN + IRIS_TEST; n++) begin
    int  cls = n % 3;
    real f [4];
    for (int d = 0; d < 4; d++) begin
      real u1 = iris_uniform(s);
      real u2 = iris_uniform(s);
      real g  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
      real v  = 2.0 * (mean[cls][d] + sd[cls][d] * g - lo[d]) / (hi[d] - lo[d]) - 1.0;
      f[d] = (v < -1.0) ? -1.0 : (v > 1.0) ? 1.0 : v;
    end
    if (n < IRIS_TRAIN) begin
      iris_tr_x[n] = f;
      iris_tr_y[n] = cls;
    end else begin
      iris_te_x[n - IRIS_TRAIN] = f;
      iris_te_y[n - IRIS_TRAIN] = cls;
    end
  end
endfunction
