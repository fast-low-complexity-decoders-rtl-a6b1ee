// spc_node_tb: streams a new random LLR vector every cycle with a random code
// length (4..256) and checks each result exactly four cycles later against a
// reference SPC decoder (hard decisions, flip the least reliable bit on odd
// parity); lanes beyond the code length must be 0.
`include "tb_common.svh"
module spc_node_tb;
  import fssc_pkg::*;
  import fssc_model_pkg::*;
  localparam int L = 256, LAT = 4, T = 300;
  int checks = 0, failures = 0;
  logic clk = 0;
  llr_t [L-1:0] llr;
  logic [3:0] log2len;
  logic [L-1:0] bits;
  logic [L-1:0] expq[$];
  int lenq[$];
  spc_node #(.LANES(L)) dut (.clk, .llr, .log2len, .bits);
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)
  initial begin
    for (int t = 0; t < T + LAT; t++) begin
      @(negedge clk);
      if (t < T) begin
        ia_t v, r;
        automatic int len = 1 << $urandom_range(2, 8);
        v = new[len];
        log2len = 4'($clog2(len));
        for (int i = 0; i < L; i++) begin
          llr[i] = llr_t'(int'($urandom_range(0, 62)) - 31);
          if (i < len) v[i] = int'(llr[i]);
        end
        r = code_model::spc(v);
        expq.push_back('0);
        foreach (r[i]) expq[$][i] = r[i][0];
      end
      if (t >= LAT) begin
        #1;
        `CHECK(bits == expq.pop_front(), $sformatf("vector %0d", t - LAT))
      end
    end
    `TB_END
  end
endmodule
