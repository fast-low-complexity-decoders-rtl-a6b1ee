// g_unit: LANES parallel G operations.
//
// y[i] = b[i] + a[i] when beta[i] = 0 and b[i] - a[i] otherwise, saturated to
// QI bits, where a = alpha_v[i], b = alpha_v[i + Nv/2] and beta is the left
// sibling's bit estimate. The G_0R special case is obtained by feeding an
// all-zero beta (multiplexer m0 in the processing unit). Combinational; the
// saturation rule is this design's choice.
module g_unit
  import fssc_pkg::*;
#(
  parameter int LANES = 256
) (
  input  llr_t [LANES-1:0] a,
  input  llr_t [LANES-1:0] b,
  input  logic [LANES-1:0] beta,
  output llr_t [LANES-1:0] y
);
  always_comb
    for (int i = 0; i < LANES; i++) y[i] = g_op(a[i], b[i], beta[i]);
endmodule
