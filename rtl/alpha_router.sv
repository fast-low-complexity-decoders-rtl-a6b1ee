// alpha_router: selects the LLRs the processing unit reads.
//
// A node at the root level (2**lvl == N) reads the channel RAM; its QC-bit
// LLRs are sign-extended to QI bits (both formats have the same single
// fractional bit). Every other node reads the alpha-RAM. Combinational.
module alpha_router
  import fssc_pkg::*;
#(
  parameter int N = 1024,
  parameter int P = 512
) (
  input  logic [3:0]        lvl,
  input  chllr_t [P/2-1:0]  ch_a,
  input  chllr_t [P/2-1:0]  ch_b,
  input  llr_t   [P/2-1:0]  ar_a,
  input  llr_t   [P/2-1:0]  ar_b,
  output llr_t   [P/2-1:0]  a,
  output llr_t   [P/2-1:0]  b
);
  localparam int LOGN = $clog2(N);
  always_comb
    for (int j = 0; j < P / 2; j++) begin
      a[j] = (int'(lvl) == LOGN) ? llr_t'(ch_a[j]) : ar_a[j];
      b[j] = (int'(lvl) == LOGN) ? llr_t'(ch_b[j]) : ar_b[j];
    end
endmodule
