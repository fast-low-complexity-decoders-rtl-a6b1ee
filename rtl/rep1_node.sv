// rep1_node: decoder of the Rep1 constituent code, Nv = 8.
//
// The left half of the node is a length-4 repetition code, the right half a
// rate-1 code. Instead of decoding the halves one after the other, the right
// half's LLRs are computed for both possible values of the repetition bit at
// once: F feeds a 4-input Rep decision beta, while two G blocks compute
// G(x | beta = 0) and G(x | beta = 1); their hard decisions (Sign) go to a
// multiplexer driven by beta. The Mix stage forms the estimate: the upper half
// beta_4^7 (hi) is the multiplexer output and the lower half beta_0^3 (lo) is
// that output, inverted when beta = 1. Everything happens in one cycle, as in
// the paper; only the final estimate is stored by the caller.
module rep1_node
  import fssc_pkg::*;
(
  input  llr_t [7:0] x,
  output logic [3:0] lo,
  output logic [3:0] hi
);
  llr_t [3:0] f, g0, g1;
  logic [3:0] s0, s1, h;
  logic       beta;

  always_comb
    for (int i = 0; i < 4; i++) begin
      f[i]  = f_op(x[i], x[i+4]);
      g0[i] = g_op(x[i], x[i+4], 1'b0);
      g1[i] = g_op(x[i], x[i+4], 1'b1);
      s0[i] = hard(g0[i]);
      s1[i] = hard(g1[i]);
    end

  rep_node #(.MAXNV(4)) u_rep (.x(f), .log2nv(3'd2), .bit_o(beta));

  assign h  = beta ? s1 : s0;      // multiplexer
  assign hi = h;                   // Mix: upper half
  assign lo = h ^ {4{beta}};       // Mix: lower half
endmodule
