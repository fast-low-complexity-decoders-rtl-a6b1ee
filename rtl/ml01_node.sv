// ml01_node: decoder of the "01" constituent code, Nv = 4.
//
// The left half of the node is frozen and the right half carries information,
// so every codeword has the form [v0 v1 v0 v1]. The maximum-likelihood
// decision is v[i] = sign(x[i] + x[i+2]) (G with an all-zero left child, then
// Sign); the node estimate is lo = v, hi = v. The sum saturates to QI bits,
// which cannot change its sign. Combinational.
module ml01_node
  import fssc_pkg::*;
(
  input  llr_t [3:0] x,
  output logic [1:0] lo,
  output logic [1:0] hi
);
  logic [1:0] v;
  always_comb begin
    for (int i = 0; i < 2; i++) v[i] = hard(g_op(x[i], x[i+2], 1'b0));
    lo = v;
    hi = v;
  end
endmodule
