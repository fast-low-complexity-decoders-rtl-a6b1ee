// f_unit_tb: random LLR pairs, including the extreme values, against an
// integer min-sum reference.
`include "tb_common.svh"
module f_unit_tb;
  import fssc_pkg::*;
  import fssc_model_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  llr_t [L-1:0] a, b, y;
  f_unit #(.LANES(L)) dut (.a, .b, .y);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < L; i++) begin
        a[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
        b[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
      end
      #1;
      for (int i = 0; i < L; i++)
        `CHECK(int'(y[i]) == code_model::fm(int'(a[i]), int'(b[i])), $sformatf("F(%0d,%0d)=%0d", a[i], b[i], y[i]))
    end
    `TB_END
  end
endmodule
