// f_unit: LANES parallel F operations (min-sum approximation of SC decoding).
//
// y[i] = sgn(a[i]) sgn(b[i]) min(|a[i]|, |b[i]|), where a holds alpha_v[i] and
// b holds alpha_v[i + Nv/2] of the node being decoded. Purely combinational.
// The paper limits F to P = 512 inputs, i.e. 256 F operations per clock
// cycle, which is the default lane count here; nodes longer than that are
// processed in ceil(Nv/P) chunks by the controller.
module f_unit
  import fssc_pkg::*;
#(
  parameter int LANES = 256
) (
  input  llr_t [LANES-1:0] a,
  input  llr_t [LANES-1:0] b,
  output llr_t [LANES-1:0] y
);
  always_comb
    for (int i = 0; i < LANES; i++) y[i] = f_op(a[i], b[i]);
endmodule
