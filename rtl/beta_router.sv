// beta_router: steers the bit estimates the processing unit produces.
//
// The estimate of a node below the root (beta_0', the m2 output) is written to
// the beta-RAM bank of the node's side. The estimate of the root node (2**lvl
// == N), produced by the last Combine (beta_1'), goes to the codeword RAM
// instead. Combinational.
module beta_router #(
  parameter int N = 1024,
  parameter int P = 512
) (
  input  logic           we,
  input  logic [3:0]     lvl,
  input  logic [P/2-1:0] beta0_lo,
  input  logic [P/2-1:0] beta0_hi,
  input  logic [P/2-1:0] beta1_lo,
  input  logic [P/2-1:0] beta1_hi,
  output logic           br_we,
  output logic [P/2-1:0] br_lo,
  output logic [P/2-1:0] br_hi,
  output logic           cw_we,
  output logic [P/2-1:0] cw_lo,
  output logic [P/2-1:0] cw_hi
);
  localparam int LOGN = $clog2(N);
  logic root;
  assign root  = (int'(lvl) == LOGN);
  assign br_we = we && !root;
  assign cw_we = we && root;
  assign br_lo = beta0_lo;
  assign br_hi = beta0_hi;
  assign cw_lo = beta1_lo;
  assign cw_hi = beta1_hi;
endmodule
