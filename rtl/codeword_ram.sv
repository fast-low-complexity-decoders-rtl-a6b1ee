// codeword_ram: two buffers of N estimated codeword bits.
//
// The decoder's last Combine writes the root estimate into buffer wr_buf:
// wr_lo[j] is bit c*LANES + j and wr_hi[j] bit N/2 + c*LANES + j of the
// codeword for chunk c. Outside logic reads 32-bit words combinationally:
// rd_data = bits [32*rd_addr, 32*rd_addr + 32) of buffer rd_buf. With two
// buffers one estimate can be read while the next frame is decoded. The
// 32-bit read word is this design's choice.
module codeword_ram #(
  parameter int N = 1024,
  parameter int P = 512,
  localparam int CW = (N > P) ? $clog2(N / P) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_buf,
  input  logic [CW-1:0]           wr_chunk,
  input  logic [P/2-1:0]          wr_lo,
  input  logic [P/2-1:0]          wr_hi,
  input  logic                    rd_buf,
  input  logic [$clog2(N/32)-1:0] rd_addr,
  output logic [31:0]             rd_data
);
  localparam int LANES = P / 2;

  logic [N-1:0] cw [2];

  always_ff @(posedge clk)
    if (wr_en)
      for (int j = 0; j < LANES; j++) begin
        cw[wr_buf][(int'(wr_chunk) * LANES + j) % N]         <= wr_lo[j];
        cw[wr_buf][(N / 2 + int'(wr_chunk) * LANES + j) % N] <= wr_hi[j];
      end

  assign rd_data = cw[rd_buf][int'(rd_addr) * 32 +: 32];
endmodule
