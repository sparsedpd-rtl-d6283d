// relu: rectified linear unit on a vector of Q1.13 activations,
// y = max(0, x), purely combinational (a sign test per element).
// Follows the paper (ReLU after the hidden FC layer).
module relu
  import sparsedpd_pkg::*;
#(
  parameter int unsigned N = HIDDEN
) (
  input  act_t x [N],
  output act_t y [N]
);
  always_comb
    for (int j = 0; j < N; j++) y[j] = x[j][DATA_W-1] ? '0 : x[j];
endmodule
