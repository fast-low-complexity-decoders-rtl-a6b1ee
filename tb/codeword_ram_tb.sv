// codeword_ram_tb: writes random estimates chunk by chunk into both buffers of
// a small memory (N = 128, 16 lanes) and reads every 32-bit word back.
`include "tb_common.svh"
module codeword_ram_tb;
  localparam int N = 128, P = 32, L = P / 2, CW = 2;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, wr_buf = 0, rd_buf = 0;
  logic [CW-1:0] wr_chunk = '0;
  logic [L-1:0] wr_lo, wr_hi;
  logic [1:0] rd_addr = '0;
  logic [31:0] rd_data;
  logic [N-1:0] x[2];
  codeword_ram #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  initial begin
    for (int r = 0; r < 10; r++) begin
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < N / 2 / L; c++) begin
          @(negedge clk);
          wr_en = 1; wr_buf = b[0]; wr_chunk = CW'(c);
          wr_lo = L'($urandom); wr_hi = L'($urandom);
          for (int j = 0; j < L; j++) begin x[b][c * L + j] = wr_lo[j]; x[b][N / 2 + c * L + j] = wr_hi[j]; end
        end
      @(negedge clk) wr_en = 0;
      for (int b = 0; b < 2; b++)
        for (int w = 0; w < N / 32; w++) begin
          rd_buf = b[0]; rd_addr = 2'(w);
          #1;
          `CHECK(rd_data == x[b][w * 32 +: 32], $sformatf("buf %0d word %0d", b, w))
        end
    end
    `TB_END
  end
endmodule
