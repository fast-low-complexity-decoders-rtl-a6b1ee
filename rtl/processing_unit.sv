// processing_unit: the datapath that executes one decoder-tree operation.
//
// It follows the processing-unit figure of the paper. Inputs are a chunk of a
// node's LLRs split in halves (alpha_a = alpha_v[i], alpha_b = alpha_v[i+Nv/2]
// for the LANES pairs of the chunk) and the bit estimates of the node's left
// and right children (beta0, beta1). Inside:
//   * F on the LLR pairs, giving the left child's LLRs;
//   * m0 chooses beta0 or all zeros; it feeds G (so G doubles as G_0R) and the
//     left input of Combine;
//   * the G output goes to Sign (rate-1 right child), SPC, RepSPC and 01, so
//     a node whose right child is one of those is decoded by a single
//     operation (R1, RSPC, 0SPC, 0RepSPC, 001);
//   * m3 picks the right-child bits for Combine: Sign, SPC, RepSPC, 01 or beta1;
//   * Rep, Rep1, RepSPC and 01 leaves decode a short node directly from its LLRs;
//   * m2 picks the node estimate beta0_lo/hi among Rep, Rep1, RepSPC, 01 and
//     Combine; m1 picks the LLR output alpha_o between F and G.
// beta1_lo/hi is the Combine output itself. Estimates are given as halves:
// lo = bits [c*LANES, ...) of the lower half of the node, hi = same of the
// upper half.
//
// Timing: everything is combinational except the SPC decoder, whose result
// appears four cycles after its input; for RSPC and 0SPC the caller holds the
// inputs for those cycles and takes the outputs in the fifth. The mux select
// encoding comes from the opcode and is this design's own.
module processing_unit
  import fssc_pkg::*;
#(
  parameter int P = 512
) (
  input  logic                 clk,
  input  opcode_e              op,
  input  logic [3:0]           log2nv,
  input  llr_t [P/2-1:0]       alpha_a,
  input  llr_t [P/2-1:0]       alpha_b,
  input  logic [P/2-1:0]       beta0,
  input  logic [P/2-1:0]       beta1,
  output llr_t [P/2-1:0]       alpha_o,
  output logic [P/2-1:0]       beta0_lo,
  output logic [P/2-1:0]       beta0_hi,
  output logic [P/2-1:0]       beta1_lo,
  output logic [P/2-1:0]       beta1_hi
);
  localparam int LANES = P / 2;

  logic             zero_l;
  logic [LANES-1:0] m0_out, m3_out, sgn, spc, clo, chi;
  llr_t [LANES-1:0] f_out, g_out;
  llr_t [31:0]      x;               // contiguous node LLRs for the leaves
  logic             rep_bit;
  logic [3:0]       r1_lo, r1_hi, rs_lo, rs_hi, grs_lo, grs_hi;
  logic [1:0]       m01_lo, m01_hi, g01_lo, g01_hi;

  // m0: all-zero left child for the G_0R / Combine_0R family
  always_comb begin
    unique case (op)
      OP_G0R, OP_COMB0R, OP_0SPC, OP_001, OP_0REPSPC: zero_l = 1'b1;
      default:                                        zero_l = 1'b0;
    endcase
  end
  assign m0_out = zero_l ? '0 : beta0;

  f_unit    #(.LANES(LANES)) u_f    (.a(alpha_a), .b(alpha_b), .y(f_out));
  g_unit    #(.LANES(LANES)) u_g    (.a(alpha_a), .b(alpha_b), .beta(m0_out), .y(g_out));
  sign_unit #(.LANES(LANES)) u_sign (.llr(g_out), .bits(sgn));
  spc_node  #(.LANES(LANES)) u_spc  (.clk(clk), .llr(g_out), .log2len(log2nv - 4'd1), .bits(spc));
  repspc_node u_g_repspc (.x(g_out[7:0]), .lo(grs_lo), .hi(grs_hi));
  ml01_node   u_g_01     (.x(g_out[3:0]), .lo(g01_lo), .hi(g01_hi));

  // m3: right-child bits for Combine
  always_comb begin
    m3_out = beta1;
    unique case (op)
      OP_R1:            m3_out = sgn;
      OP_RSPC, OP_0SPC: m3_out = spc;
      OP_0REPSPC:       m3_out = LANES'({grs_hi, grs_lo});
      OP_001:           m3_out = LANES'({g01_hi, g01_lo});
      default:          m3_out = beta1;
    endcase
  end

  combine_unit #(.LANES(LANES)) u_comb (.beta_l(m0_out), .beta_r(m3_out), .lo(clo), .hi(chi));

  // leaves decoded straight from the node LLRs (Nv <= 32)
  always_comb
    for (int i = 0; i < 32; i++) begin
      x[i] = '0;
      for (int s = 2; s <= 5; s++)
        if (int'(log2nv) == s)
          x[i] = (i < (1 << (s - 1))) ? alpha_a[i % LANES] : alpha_b[(i - (1 << (s - 1))) % LANES];
    end

  rep_node #(.MAXNV(32)) u_rep (.x(x), .log2nv(log2nv[2:0]), .bit_o(rep_bit));
  rep1_node   u_rep1   (.x(x[7:0]), .lo(r1_lo), .hi(r1_hi));
  repspc_node u_repspc (.x(x[7:0]), .lo(rs_lo), .hi(rs_hi));
  ml01_node   u_01     (.x(x[3:0]), .lo(m01_lo), .hi(m01_hi));

  // m2: node estimate
  always_comb begin
    unique case (op)
      OP_REP:    begin beta0_lo = {LANES{rep_bit}}; beta0_hi = {LANES{rep_bit}}; end
      OP_REP1:   begin beta0_lo = LANES'(r1_lo);    beta0_hi = LANES'(r1_hi);    end
      OP_REPSPC: begin beta0_lo = LANES'(rs_lo);    beta0_hi = LANES'(rs_hi);    end
      OP_01:     begin beta0_lo = LANES'(m01_lo);   beta0_hi = LANES'(m01_hi);   end
      default:   begin beta0_lo = clo;              beta0_hi = chi;              end
    endcase
  end
  assign beta1_lo = clo;
  assign beta1_hi = chi;

  // m1: LLR output
  assign alpha_o = (op == OP_F) ? f_out : g_out;
endmodule
