// alpha_router_tb: at the root level the channel LLRs, sign-extended, go to
// the processing unit; at all other levels the alpha-memory LLRs do.
`include "tb_common.svh"
module alpha_router_tb;
  import fssc_pkg::*;
  localparam int N = 1024, P = 512, L = P / 2;
  int checks = 0, failures = 0;
  logic [3:0] lvl;
  chllr_t [L-1:0] ch_a, ch_b;
  llr_t [L-1:0] ar_a, ar_b, a, b;
  alpha_router #(.N(N), .P(P)) dut (.*);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 100; t++) begin
      lvl = 4'($urandom_range(1, 10));
      for (int j = 0; j < L; j++) begin
        ch_a[j] = chllr_t'($urandom); ch_b[j] = chllr_t'($urandom);
        ar_a[j] = llr_t'($urandom);   ar_b[j] = llr_t'($urandom);
      end
      #1;
      for (int j = 0; j < L; j++)
        if (lvl == 10) `CHECK(int'(a[j]) == int'(ch_a[j]) && int'(b[j]) == int'(ch_b[j]), $sformatf("root lane %0d", j))
        else           `CHECK(a[j] == ar_a[j] && b[j] == ar_b[j], $sformatf("level %0d lane %0d", lvl, j))
    end
    `TB_END
  end
endmodule
