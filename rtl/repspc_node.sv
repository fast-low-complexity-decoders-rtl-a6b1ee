// repspc_node: decoder of the RepSPC constituent code, Nv = 8.
//
// The left half is a length-4 repetition code and the right half a length-4
// single-parity-check code. The node is decoded in one combinational pass:
// F and a 4-input Rep give the repetition bit r; G with r gives the right
// half's LLRs; SPC makes their hard decisions s satisfy even parity by
// flipping the least reliable one (lowest index on a tie); Combine gives
// lo = s xor r and hi = s. G saturates to QI bits.
module repspc_node
  import fssc_pkg::*;
(
  input  llr_t [7:0] x,
  output logic [3:0] lo,
  output logic [3:0] hi
);
  llr_t [3:0]    f, g;
  logic          r, par;
  logic [3:0]    s;
  logic [1:0]    imin;
  logic [QI-1:0] mmin;

  always_comb
    for (int i = 0; i < 4; i++) f[i] = f_op(x[i], x[i+4]);

  rep_node #(.MAXNV(4)) u_rep (.x(f), .log2nv(3'd2), .bit_o(r));

  always_comb begin
    par  = 1'b0;
    imin = '0;
    mmin = '1;
    for (int i = 0; i < 4; i++) begin
      g[i] = g_op(x[i], x[i+4], r);
      s[i] = hard(g[i]);
      par ^= s[i];
      if (mag(g[i]) < mmin) begin
        mmin = mag(g[i]);
        imin = 2'(i);
      end
    end
    if (par) s[imin] = ~s[imin];
    lo = s ^ {4{r}};
    hi = s;
  end
endmodule
