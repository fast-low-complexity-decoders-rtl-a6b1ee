// combine_unit_tb: random bit vectors; lower half is the xor, upper half the
// right child.
`include "tb_common.svh"
module combine_unit_tb;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic [L-1:0] bl, br, lo, hi;
  combine_unit #(.LANES(L)) dut (.beta_l(bl), .beta_r(br), .lo, .hi);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 100; t++) begin
      bl = $urandom;
      br = $urandom;
      #1;
      for (int i = 0; i < L; i++) begin
        `CHECK(lo[i] == (bl[i] != br[i]), "lower half")
        `CHECK(hi[i] == br[i], "upper half")
      end
    end
    `TB_END
  end
endmodule
