// processing_unit_tb: every opcode at its supported node sizes on a 32-lane
// unit, with random LLRs and child estimates, against the reference decoder
// functions. Inputs are held for five cycles so the SPC path has settled; the
// SPC latency itself is checked in spc_node_tb.
`include "tb_common.svh"
module processing_unit_tb;
  import fssc_pkg::*;
  import fssc_model_pkg::*;
  localparam int P = 64, L = P / 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  opcode_e op;
  logic [3:0] log2nv;
  llr_t [L-1:0] alpha_a, alpha_b, alpha_o;
  logic [L-1:0] beta0, beta1, beta0_lo, beta0_hi, beta1_lo, beta1_hi;
  processing_unit #(.P(P)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)

  task automatic run(opcode_e o, int nv);
    ia_t a, b0, b1, z, e;
    int h = nv / 2;
    a = new[nv]; b0 = new[h]; b1 = new[h]; z = code_model::zeros(h);
    @(negedge clk);
    op = o; log2nv = 4'($clog2(nv));
    alpha_a = '0; alpha_b = '0; beta0 = L'($urandom); beta1 = L'($urandom);
    foreach (a[i]) a[i] = int'($urandom_range(0, 62)) - 31;
    for (int i = 0; i < h; i++) begin
      alpha_a[i] = llr_t'(a[i]); alpha_b[i] = llr_t'(a[i + h]);
      b0[i] = int'(beta0[i]); b1[i] = int'(beta1[i]);
    end
    case (o)
      OP_F:       e = code_model::fv(a);
      OP_G:       e = code_model::gv(a, b0);
      OP_G0R:     e = code_model::gv(a, z);
      OP_COMB:    e = code_model::comb(b0, b1);
      OP_COMB0R:  e = code_model::comb(z, b1);
      OP_R1:      e = code_model::comb(b0, code_model::hardv(code_model::gv(a, b0)));
      OP_RSPC:    e = code_model::comb(b0, code_model::spc(code_model::gv(a, b0)));
      OP_0SPC:    e = code_model::comb(z, code_model::spc(code_model::gv(a, z)));
      OP_REP:     e = code_model::rep(a);
      OP_REP1:    begin b0 = code_model::rep(code_model::fv(a));
                        e = code_model::comb(b0, code_model::hardv(code_model::gv(a, b0))); end
      OP_REPSPC:  e = code_model::repspc(a);
      OP_01:      e = code_model::ml01(a);
      OP_001:     e = code_model::comb(z, code_model::ml01(code_model::gv(a, z)));
      default:    e = code_model::comb(z, code_model::repspc(code_model::gv(a, z)));
    endcase
    repeat (5) @(posedge clk);
    #1;
    if (o == OP_F || o == OP_G || o == OP_G0R) begin
      for (int i = 0; i < h; i++)
        `CHECK(int'(alpha_o[i]) == e[i], $sformatf("%s Nv=%0d alpha[%0d]", o.name(), nv, i))
    end else begin
      for (int i = 0; i < h; i++) begin
        `CHECK(beta0_lo[i] == e[i][0] && beta0_hi[i] == e[i + h][0],
               $sformatf("%s Nv=%0d beta[%0d]", o.name(), nv, i))
        if (o < OP_REP)
          `CHECK(beta1_lo[i] == e[i][0] && beta1_hi[i] == e[i + h][0],
                 $sformatf("%s Nv=%0d combine out[%0d]", o.name(), nv, i))
      end
    end
  endtask

  initial begin
    for (int r = 0; r < 10; r++) begin
      for (int nv = 2; nv <= P; nv *= 2) begin
        run(OP_F, nv); run(OP_G, nv); run(OP_G0R, nv); run(OP_COMB, nv); run(OP_COMB0R, nv);
        run(OP_R1, nv);
        if (nv >= 8) begin run(OP_RSPC, nv); run(OP_0SPC, nv); end
      end
      for (int nv = 4; nv <= 32; nv *= 2) run(OP_REP, nv);
      run(OP_REP1, 8); run(OP_REPSPC, 8); run(OP_01, 4); run(OP_001, 8); run(OP_0REPSPC, 16);
    end
    `TB_END
  end
endmodule
