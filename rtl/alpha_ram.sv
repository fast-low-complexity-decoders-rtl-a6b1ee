// alpha_ram: LLR memory of the decoder tree, built from registers.
//
// The LLRs of a node of length Nv = 2**s are kept at addresses [Nv, 2Nv), so
// every tree level from Nv = 2 to N/2 has its own region and N-1 LLRs are
// stored in all (the root's LLRs stay in the channel RAM). A right child
// overwrites its left sibling, which is finished by then.
//
// Read (combinational): node level rd_lvl and chunk rd_chunk give
//   rd_a[j] = alpha_v[c*LANES + j], rd_b[j] = alpha_v[Nv/2 + c*LANES + j]
// for j < min(Nv/2, LANES); other lanes are don't-care.
// Write (clock edge): level wr_lvl, chunk wr_chunk, LLRs wr_data[j] for
// j < min(2**wr_lvl, LANES). Registers follow the ASIC version of the paper,
// which used no SRAM; the layout is this design's own. Addresses 0 and 1 are
// never written or read (no level has Nv = 1), so synthesis may report them as
// undriven, which is harmless.
module alpha_ram
  import fssc_pkg::*;
#(
  parameter int N = 1024,
  parameter int P = 512,
  localparam int CW = (N > P) ? $clog2(N / P) : 1
) (
  input  logic                  clk,
  input  logic [3:0]            rd_lvl,
  input  logic [CW-1:0]         rd_chunk,
  output llr_t [P/2-1:0]        rd_a,
  output llr_t [P/2-1:0]        rd_b,
  input  logic                  wr_en,
  input  logic [3:0]            wr_lvl,
  input  logic [CW-1:0]         wr_chunk,
  input  llr_t [P/2-1:0]        wr_data
);
  localparam int LANES = P / 2;
  localparam int LOGN  = $clog2(N);

  llr_t mem [N];

  always_comb
    for (int j = 0; j < LANES; j++) begin
      rd_a[j] = '0;
      rd_b[j] = '0;
      for (int s = 1; s < LOGN; s++)
        if (int'(rd_lvl) == s && j < (1 << (s - 1))) begin
          rd_a[j] = mem[((1 << s) + (((1 << s) > P) ? int'(rd_chunk) * LANES : 0) + j) % N];
          rd_b[j] = mem[((1 << s) + (1 << (s - 1)) + (((1 << s) > P) ? int'(rd_chunk) * LANES : 0) + j) % N];
        end
    end

  always_ff @(posedge clk)
    if (wr_en)
      for (int s = 1; s < LOGN; s++)
        if (int'(wr_lvl) == s)
          for (int j = 0; j < LANES; j++)
            if (j < (1 << s))
              mem[((1 << s) + (((1 << s) > LANES) ? int'(wr_chunk) * LANES : 0) + j) % N] <= wr_data[j];
endmodule
