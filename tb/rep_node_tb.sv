// rep_node_tb: for each length 4..32, random LLRs (biased so both decisions
// occur); the decision must be the sign of the sum of the first Nv LLRs only.
`include "tb_common.svh"
module rep_node_tb;
  import fssc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [31:0] x;
  logic [2:0] log2nv;
  logic bit_o;
  rep_node dut (.x, .log2nv, .bit_o);
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic int s = 0, bias = int'($urandom_range(0, 8)) - 4;
      log2nv = 3'(2 + t % 4);
      for (int i = 0; i < 32; i++) begin
        x[i] = llr_t'(int'($urandom_range(0, 40)) - 20 + bias);
        if (i < (1 << log2nv)) s += int'(x[i]);
      end
      #1;
      `CHECK(bit_o == (s < 0), $sformatf("Nv=%0d sum=%0d bit=%0d", 1 << log2nv, s, bit_o))
    end
    `TB_END
  end
endmodule
