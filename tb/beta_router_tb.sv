// beta_router_tb: below the root the node estimate goes to the beta memory;
// at the root the Combine output goes to the codeword memory instead.
`include "tb_common.svh"
module beta_router_tb;
  localparam int N = 1024, P = 512, L = P / 2;
  int checks = 0, failures = 0;
  logic we, br_we, cw_we;
  logic [3:0] lvl;
  logic [L-1:0] beta0_lo, beta0_hi, beta1_lo, beta1_hi, br_lo, br_hi, cw_lo, cw_hi;
  beta_router #(.N(N), .P(P)) dut (.*);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 200; t++) begin
      we = 1'($urandom); lvl = 4'($urandom_range(1, 10));
      beta0_lo = L'($urandom); beta0_hi = L'($urandom); beta1_lo = L'($urandom); beta1_hi = L'($urandom);
      #1;
      `CHECK(br_we == (we && lvl != 10) && cw_we == (we && lvl == 10), $sformatf("enables at level %0d", lvl))
      if (br_we) `CHECK(br_lo == beta0_lo && br_hi == beta0_hi, "beta memory data")
      if (cw_we) `CHECK(cw_lo == beta1_lo && cw_hi == beta1_hi, "codeword data")
    end
    `TB_END
  end
endmodule
