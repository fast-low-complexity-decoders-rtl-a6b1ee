// beta_ram: bit-estimate memory of the decoder tree, built from registers.
//
// Two banks of N bits, one for left children (L) and one for right children
// (R). The estimate of a node of length Nv = 2**s is kept at [Nv, 2Nv) of the
// bank of its side. A parent reads both children at level s-1 to combine them,
// and G reads the left child.
//
// Read (combinational): child level rd_lvl, chunk rd_chunk:
//   rd_l[j] = L[2**rd_lvl + c*LANES + j], rd_r[j] = R[...] for j < min(2**rd_lvl, LANES).
// Write (clock edge): node level wr_lvl, bank wr_side, chunk wr_chunk; wr_lo[j]
// goes to bit c*LANES + j of the node and wr_hi[j] to bit Nv/2 + c*LANES + j,
// for j < min(Nv/2, LANES). The two-bank layout is this design's own.
// Bits 0 and 1 of each bank (the level of single-bit nodes) are never written
// or read, because the smallest node the program writes has Nv = 2; synthesis
// may report them as undriven, which is harmless.
module beta_ram #(
  parameter int N = 1024,
  parameter int P = 512,
  localparam int CW = (N > P) ? $clog2(N / P) : 1
) (
  input  logic             clk,
  input  logic [3:0]       rd_lvl,
  input  logic [CW-1:0]    rd_chunk,
  output logic [P/2-1:0]   rd_l,
  output logic [P/2-1:0]   rd_r,
  input  logic             wr_en,
  input  logic             wr_side,
  input  logic [3:0]       wr_lvl,
  input  logic [CW-1:0]    wr_chunk,
  input  logic [P/2-1:0]   wr_lo,
  input  logic [P/2-1:0]   wr_hi
);
  localparam int LANES = P / 2;
  localparam int LOGN  = $clog2(N);

  logic [N-1:0] bank_l, bank_r;

  always_comb
    for (int j = 0; j < LANES; j++) begin
      rd_l[j] = 1'b0;
      rd_r[j] = 1'b0;
      for (int s = 1; s < LOGN; s++)
        if (int'(rd_lvl) == s && j < (1 << s)) begin
          rd_l[j] = bank_l[((1 << s) + (((1 << s) > LANES) ? int'(rd_chunk) * LANES : 0) + j) % N];
          rd_r[j] = bank_r[((1 << s) + (((1 << s) > LANES) ? int'(rd_chunk) * LANES : 0) + j) % N];
        end
    end

  always_ff @(posedge clk)
    if (wr_en)
      for (int s = 1; s < LOGN; s++)
        if (int'(wr_lvl) == s)
          for (int j = 0; j < LANES; j++)
            if (j < (1 << (s - 1))) begin
              if (wr_side) begin
                bank_r[((1 << s) + (((1 << s) > P) ? int'(wr_chunk) * LANES : 0) + j) % N] <= wr_lo[j];
                bank_r[((1 << s) + (1 << (s - 1)) + (((1 << s) > P) ? int'(wr_chunk) * LANES : 0) + j) % N] <= wr_hi[j];
              end else begin
                bank_l[((1 << s) + (((1 << s) > P) ? int'(wr_chunk) * LANES : 0) + j) % N] <= wr_lo[j];
                bank_l[((1 << s) + (1 << (s - 1)) + (((1 << s) > P) ? int'(wr_chunk) * LANES : 0) + j) % N] <= wr_hi[j];
              end
            end
endmodule
