// sign_unit: hard decisions on LANES LLRs.
//
// bits[i] = 1 when llr[i] is negative, 0 otherwise (an LLR of zero decides 0,
// this design's choice). In the processing unit it decodes a rate-1 right
// child from the G output (R1 node). Combinational.
module sign_unit
  import fssc_pkg::*;
#(
  parameter int LANES = 256
) (
  input  llr_t [LANES-1:0] llr,
  output logic [LANES-1:0] bits
);
  always_comb
    for (int i = 0; i < LANES; i++) bits[i] = hard(llr[i]);
endmodule
