// spc_node: pipelined single-parity-check decoder for up to LANES LLRs.
//
// An SPC codeword has even parity. The decoder takes the hard decisions of its
// inputs and, when their parity is odd, flips the one with the smallest
// magnitude (lowest index on a tie). Only the first 2**log2len lanes belong to
// the code; the others are ignored and output 0.
//
// Timing: four register stages, no enable. Inputs presented in cycle t give
// bits in cycle t+4. Stage 1 registers hard decisions and magnitudes, stage 2
// the minimum, its index and the parity of each group of GROUP lanes, stage 3
// the overall minimum index and parity, stage 4 the corrected bits. With the
// read cycle this gives the ceil(Nv/P) + 4 cycles the paper states for the
// SPC-based nodes; the split into stages is this design's own.
module spc_node
  import fssc_pkg::*;
#(
  parameter int LANES = 256,
  parameter int GROUP = 16
) (
  input  logic             clk,
  input  llr_t [LANES-1:0] llr,
  input  logic [3:0]       log2len,
  output logic [LANES-1:0] bits
);
  localparam int NG = LANES / GROUP;
  localparam int IW = $clog2(LANES);
  localparam int GW = (GROUP > 1) ? $clog2(GROUP) : 1;

  // stage 1
  logic [LANES-1:0]          h1;
  logic [LANES-1:0][QI-1:0]  m1;
  // stage 2
  logic [LANES-1:0]          h2;
  logic [NG-1:0][QI-1:0]     gm2;
  logic [NG-1:0][GW-1:0]     gi2;
  logic [NG-1:0]             gp2;
  // stage 3
  logic [LANES-1:0]          h3;
  logic [IW-1:0]             i3;
  logic                      p3;

  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) begin
      if (i < (1 << log2len)) begin
        h1[i] <= hard(llr[i]);
        m1[i] <= mag(llr[i]);
      end else begin
        h1[i] <= 1'b0;
        m1[i] <= '1;
      end
    end

  always_ff @(posedge clk) begin
    h2 <= h1;
    for (int g = 0; g < NG; g++) begin
      logic [QI-1:0] mm;
      logic [GW-1:0] ii;
      logic          pp;
      mm = '1;
      ii = '0;
      pp = 1'b0;
      for (int k = 0; k < GROUP; k++) begin
        pp ^= h1[g*GROUP+k];
        if (m1[g*GROUP+k] < mm) begin
          mm = m1[g*GROUP+k];
          ii = GW'(k);
        end
      end
      gm2[g] <= mm;
      gi2[g] <= ii;
      gp2[g] <= pp;
    end
  end

  always_ff @(posedge clk) begin
    logic [QI-1:0] mm;
    logic [IW-1:0] ii;
    logic          pp;
    mm = '1;
    ii = '0;
    pp = 1'b0;
    for (int g = 0; g < NG; g++) begin
      pp ^= gp2[g];
      if (gm2[g] < mm || g == 0) begin
        mm = gm2[g];
        ii = IW'(g * GROUP) + IW'(gi2[g]);
      end
    end
    h3 <= h2;
    i3 <= ii;
    p3 <= pp;
  end

  always_ff @(posedge clk) begin
    bits <= h3;
    if (p3) bits[i3] <= ~h3[i3];
  end
endmodule
