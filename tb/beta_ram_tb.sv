// beta_ram_tb: random node writes (both banks, all levels, all chunks) and
// child reads on a small memory (N = 64, 8 lanes) against an array model. A
// write stores its lower and upper halves at the two halves of the node; a
// read returns a chunk of the stored left and right estimates of a level.
`include "tb_common.svh"
module beta_ram_tb;
  localparam int N = 64, P = 16, L = P / 2, LOGN = 6, CW = 2;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, wr_side = 0;
  logic [3:0] rd_lvl = 1, wr_lvl = 1;
  logic [CW-1:0] rd_chunk = '0, wr_chunk = '0;
  logic [L-1:0] rd_l, rd_r, wr_lo, wr_hi;
  bit model[2][LOGN][N];
  bit valid[2][LOGN][N];
  beta_ram #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int s = int'($urandom_range(1, LOGN - 1));
      automatic int h = 1 << (s - 1);
      @(negedge clk);
      if ($urandom_range(0, 1) == 0) begin
        automatic int c = (h > L) ? int'($urandom_range(0, h / L - 1)) : 0;
        automatic int sd = int'($urandom_range(0, 1));
        wr_en = 1; wr_lvl = 4'(s); wr_chunk = CW'(c); wr_side = sd[0];
        wr_lo = L'($urandom); wr_hi = L'($urandom);
        for (int j = 0; j < L && j < h; j++) begin
          model[sd][s][c * L + j] = wr_lo[j];     valid[sd][s][c * L + j] = 1;
          model[sd][s][h + c * L + j] = wr_hi[j]; valid[sd][s][h + c * L + j] = 1;
        end
      end else begin
        automatic int n = 1 << s;
        automatic int c = (n > L) ? int'($urandom_range(0, n / L - 1)) : 0;
        wr_en = 0; rd_lvl = 4'(s); rd_chunk = CW'(c);
        #1;
        for (int j = 0; j < L && j < n; j++) begin
          if (valid[0][s][c * L + j]) `CHECK(rd_l[j] == model[0][s][c * L + j], $sformatf("lvl %0d L[%0d]", s, j))
          if (valid[1][s][c * L + j]) `CHECK(rd_r[j] == model[1][s][c * L + j], $sformatf("lvl %0d R[%0d]", s, j))
        end
      end
    end
    `TB_END
  end
endmodule
