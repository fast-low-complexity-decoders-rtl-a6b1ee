// channel_ram: two frame buffers of N channel LLRs (QC bits each).
//
// The channel loader fills one buffer, W LLRs per write (word address
// wr_addr covers LLRs [W*wr_addr, W*wr_addr + W)), while the decoder reads the
// other. A read of chunk c of the root node returns
//   rd_a[j] = y[c*LANES + j], rd_b[j] = y[N/2 + c*LANES + j], j < LANES,
// combinationally. Two buffers let a frame be loaded during the decoding of
// the previous one, as the paper requires; storage is registers.
module channel_ram
  import fssc_pkg::*;
#(
  parameter int N = 1024,
  parameter int P = 512,
  localparam int CW = (N > P) ? $clog2(N / P) : 1,
  parameter int W = 32
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic                   wr_buf,
  input  logic [$clog2(N/W)-1:0] wr_addr,
  input  chllr_t [W-1:0]         wr_data,
  input  logic                   rd_buf,
  input  logic [CW-1:0]          rd_chunk,
  output chllr_t [P/2-1:0]       rd_a,
  output chllr_t [P/2-1:0]       rd_b
);
  localparam int LANES = P / 2;

  chllr_t mem [2][N];

  always_ff @(posedge clk)
    if (wr_en)
      for (int k = 0; k < W; k++) mem[wr_buf][int'(wr_addr) * W + k] <= wr_data[k];

  always_comb
    for (int j = 0; j < LANES; j++) begin
      rd_a[j] = mem[rd_buf][(int'(rd_chunk) * LANES + j) % N];
      rd_b[j] = mem[rd_buf][(N / 2 + int'(rd_chunk) * LANES + j) % N];
    end
endmodule
