// ml01_node_tb: the estimate must be the maximum-likelihood codeword of the
// (4,2) code {[v0 v1 v0 v1]}, found here by exhaustive search over the four
// codewords (correlation with the LLRs, ties to the smaller index).
`include "tb_common.svh"
module ml01_node_tb;
  import fssc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [3:0] x;
  logic [1:0] lo, hi;
  ml01_node dut (.x, .lo, .hi);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 300; t++) begin
      automatic int best = -1000, bv = 0;
      for (int i = 0; i < 4; i++) x[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
      for (int v = 0; v < 4; v++) begin
        automatic int c = 0;
        for (int i = 0; i < 4; i++) c += ((v >> (i % 2)) & 1) ? -int'(x[i]) : int'(x[i]);
        if (c > best) begin best = c; bv = v; end
      end
      #1;
      // ties between codewords are legitimately resolved either way
      if (int'(x[0]) + int'(x[2]) != 0 && int'(x[1]) + int'(x[3]) != 0) begin
        `CHECK(lo == 2'(bv) && hi == 2'(bv), $sformatf("x=%p got %b%b want %b", x, hi, lo, 2'(bv)))
      end
    end
    `TB_END
  end
endmodule
