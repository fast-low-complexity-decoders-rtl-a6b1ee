// alpha_ram_tb: random chunk writes and reads at every tree level of a small
// memory (N = 64, 8 lanes) against a per-level array model. Writing one level
// must never disturb another, and a read of level s must return the two node
// halves of the chosen chunk.
`include "tb_common.svh"
module alpha_ram_tb;
  import fssc_pkg::*;
  localparam int N = 64, P = 16, L = P / 2, LOGN = 6, CW = 2;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [3:0] rd_lvl = 1, wr_lvl = 1;
  logic [CW-1:0] rd_chunk = '0, wr_chunk = '0;
  llr_t [L-1:0] rd_a, rd_b, wr_data;
  int model[LOGN][N];
  bit valid[LOGN][N];
  alpha_ram #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int s = int'($urandom_range(1, LOGN - 1));
      automatic int nc = ((1 << s) > L) ? (1 << s) / L : 1;
      automatic int c = int'($urandom_range(0, nc - 1));
      @(negedge clk);
      if ($urandom_range(0, 1) == 0) begin
        wr_en = 1; wr_lvl = 4'(s); wr_chunk = CW'(c);
        for (int j = 0; j < L; j++) begin
          wr_data[j] = llr_t'(int'($urandom_range(0, 62)) - 31);
          if (j < (1 << s)) begin model[s][c * L + j] = int'(wr_data[j]); valid[s][c * L + j] = 1; end
        end
      end else begin
        automatic int h = 1 << (s - 1);
        automatic int rc = (h > L) ? int'($urandom_range(0, h / L - 1)) : 0;
        wr_en = 0; rd_lvl = 4'(s); rd_chunk = CW'(rc);
        #1;
        for (int j = 0; j < L && j < h; j++) begin
          if (valid[s][rc * L + j])
            `CHECK(int'(rd_a[j]) == model[s][rc * L + j], $sformatf("lvl %0d a[%0d]", s, j))
          if (valid[s][h + rc * L + j])
            `CHECK(int'(rd_b[j]) == model[s][h + rc * L + j], $sformatf("lvl %0d b[%0d]", s, j))
        end
      end
    end
    `TB_END
  end
endmodule
