// channel_ram_tb: fills both buffers of a small memory (N = 128, 32-LLR words,
// 16 lanes) word by word, then reads every chunk of both buffers and compares
// both halves with what was written. Writes into one buffer while reading the
// other must not disturb the read data.
`include "tb_common.svh"
module channel_ram_tb;
  import fssc_pkg::*;
  localparam int N = 128, P = 32, L = P / 2, W = 32, CW = 2;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, wr_buf = 0, rd_buf = 0;
  logic [1:0] wr_addr = '0;
  chllr_t [W-1:0] wr_data;
  logic [CW-1:0] rd_chunk = '0;
  chllr_t [L-1:0] rd_a, rd_b;
  int y[2][N];
  channel_ram #(.N(N), .P(P), .W(W)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  task automatic read_all(int b);
    for (int c = 0; c < N / 2 / L; c++) begin
      rd_buf = b[0]; rd_chunk = CW'(c);
      #1;
      for (int j = 0; j < L; j++) begin
        `CHECK(int'(rd_a[j]) == y[b][c * L + j], $sformatf("buf %0d chunk %0d a[%0d]", b, c, j))
        `CHECK(int'(rd_b[j]) == y[b][N / 2 + c * L + j], $sformatf("buf %0d chunk %0d b[%0d]", b, c, j))
      end
    end
  endtask
  initial begin
    for (int r = 0; r < 5; r++)
      for (int b = 0; b < 2; b++) begin
        for (int w = 0; w < N / W; w++) begin
          @(negedge clk);
          wr_en = 1; wr_buf = b[0]; wr_addr = 2'(w);
          for (int k = 0; k < W; k++) begin
            wr_data[k] = chllr_t'(int'($urandom_range(0, 30)) - 15);
            y[b][w * W + k] = int'(wr_data[k]);
          end
          if (r > 0) read_all(1 - b);
        end
        @(negedge clk) wr_en = 0;
        read_all(b);
      end
    `TB_END
  end
endmodule
