// rep_node: repetition-code decoder for Nv = 4, 8, 16 or 32.
//
// A repetition code carries one information bit copied over all Nv positions;
// the maximum-likelihood decision is the sign of the sum of the Nv input LLRs.
// x holds the node's LLRs contiguously (x[0] = alpha_v[0]); entries at and
// above Nv are ignored. The sum is kept at full width, so no saturation.
// Combinational; the whole node is decoded in the cycle it is read.
// The paper raises the maximum repetition length from 16 to 32.
module rep_node
  import fssc_pkg::*;
#(
  parameter int MAXNV = 32
) (
  input  llr_t [MAXNV-1:0] x,
  input  logic [2:0]       log2nv,
  output logic             bit_o
);
  localparam int SW = QI + $clog2(MAXNV) + 1;
  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < MAXNV; i++)
      if (i < (1 << log2nv)) sum += SW'(x[i]);
    bit_o = sum[SW-1];
  end
endmodule
