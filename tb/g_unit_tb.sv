// g_unit_tb: random LLR pairs and bits against b +- a saturated to +-31.
`include "tb_common.svh"
module g_unit_tb;
  import fssc_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  llr_t [L-1:0] a, b, y;
  logic [L-1:0] beta;
  g_unit #(.LANES(L)) dut (.a, .b, .beta, .y);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < L; i++) begin
        a[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
        b[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
      end
      beta = L'($urandom);
      #1;
      for (int i = 0; i < L; i++) begin
        automatic int e = beta[i] ? int'(b[i]) - int'(a[i]) : int'(b[i]) + int'(a[i]);
        e = (e > 31) ? 31 : (e < -31) ? -31 : e;
        `CHECK(int'(y[i]) == e, $sformatf("G(%0d,%0d,%0d)=%0d", a[i], b[i], beta[i], y[i]))
      end
    end
    `TB_END
  end
endmodule
