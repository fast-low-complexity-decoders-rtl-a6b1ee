// sign_unit_tb: hard decision is 1 exactly for negative LLRs.
`include "tb_common.svh"
module sign_unit_tb;
  import fssc_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  llr_t [L-1:0] llr;
  logic [L-1:0] bits;
  sign_unit #(.LANES(L)) dut (.llr, .bits);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < L; i++) llr[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
      #1;
      for (int i = 0; i < L; i++) `CHECK(bits[i] == (int'(llr[i]) < 0), $sformatf("sign of %0d", llr[i]))
    end
    `TB_END
  end
endmodule
