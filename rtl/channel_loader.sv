// channel_loader: writes the incoming channel LLRs into the channel RAM.
//
// The channel delivers W = 32 LLRs (160 bits) per cycle with a valid/ready
// handshake: a word is taken on a clock edge where in_valid and in_ready are
// both high. Words fill the current buffer in order; after the N/W-th word the
// buffer is marked full and the loader moves to the other buffer. in_ready is
// low (the source is stalled) while the buffer to be filled is still full,
// i.e. until the controller has decoded it and pulsed release for it. The
// handshake and the full/release flags are this design's choices; the paper
// gives the rate of 32 LLRs per cycle and the double buffering.
module channel_loader
  import fssc_pkg::*;
#(
  parameter int N = 1024,
  parameter int W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  chllr_t [W-1:0]         in_llr,
  output logic                   wr_en,
  output logic                   wr_buf,
  output logic [$clog2(N/W)-1:0] wr_addr,
  output chllr_t [W-1:0]         wr_data,
  output logic [1:0]             full,
  input  logic [1:0]             release_buf
);
  localparam int AW = $clog2(N / W);

  logic          buf_q;
  logic [AW-1:0] addr_q;

  assign in_ready = !full[buf_q];
  assign wr_en    = in_valid && in_ready;
  assign wr_buf   = buf_q;
  assign wr_addr  = addr_q;
  assign wr_data  = in_llr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      buf_q  <= 1'b0;
      addr_q <= '0;
      full   <= '0;
    end else begin
      full <= full & ~release_buf;
      if (wr_en) begin
        addr_q <= addr_q + 1'b1;
        if (addr_q == AW'(N / W - 1)) begin
          full[buf_q] <= 1'b1;
          buf_q       <= ~buf_q;
        end
      end
    end

  // a buffer is never released while it is being filled
  assert property (@(posedge clk) disable iff (!rst_n) !(release_buf[buf_q] && addr_q != '0));
endmodule
