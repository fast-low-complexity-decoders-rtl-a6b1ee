// combine_unit: LANES parallel Combine operations.
//
// For bit pair i of a node: lo[i] = beta_l[i] xor beta_r[i] is the bit of the
// lower half of the node's estimate beta_v, hi[i] = beta_r[i] that of the upper
// half. Combine_0R is obtained by feeding beta_l = 0. Combinational.
module combine_unit #(
  parameter int LANES = 256
) (
  input  logic [LANES-1:0] beta_l,
  input  logic [LANES-1:0] beta_r,
  output logic [LANES-1:0] lo,
  output logic [LANES-1:0] hi
);
  assign lo = beta_l ^ beta_r;
  assign hi = beta_r;
endmodule
