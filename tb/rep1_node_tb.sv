// rep1_node_tb: random 8-LLR nodes against the successive-cancellation
// reference: repetition decision on F, then hard decisions on G, then Combine.
`include "tb_common.svh"
module rep1_node_tb;
  import fssc_pkg::*;
  import fssc_model_pkg::*;
  int checks = 0, failures = 0;
  llr_t [7:0] x;
  logic [3:0] lo, hi;
  rep1_node dut (.x, .lo, .hi);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 300; t++) begin
      ia_t a, bl, e;
      a = new[8];
      foreach (a[i]) begin a[i] = int'($urandom_range(0, 62)) - 31; x[i] = llr_t'(a[i]); end
      bl = code_model::rep(code_model::fv(a));
      e = code_model::comb(bl, code_model::hardv(code_model::gv(a, bl)));
      #1;
      for (int i = 0; i < 4; i++) begin
        `CHECK(lo[i] == e[i][0], $sformatf("t%0d lo[%0d]", t, i))
        `CHECK(hi[i] == e[i + 4][0], $sformatf("t%0d hi[%0d]", t, i))
      end
    end
    `TB_END
  end
endmodule
