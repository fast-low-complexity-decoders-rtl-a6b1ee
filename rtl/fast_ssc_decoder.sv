// fast_ssc_decoder: rate-flexible Fast-SSC polar decoder, top level.
//
// Blocks, as in the paper's high-level architecture: the instruction RAM holds
// the decoder tree of the code as a program; the channel loader stores the
// channel LLRs 32 per cycle into a double-buffered channel RAM; the controller
// steps through the program and drives the processing unit; the alpha-router
// feeds the processing unit from the channel RAM (root) or the alpha-RAM; the
// beta-router sends bit estimates to the beta-RAM or, for the root, to the
// double-buffered codeword RAM, which is read from outside.
//
// Use: load the program with imem_we/imem_addr/imem_data, stream a frame of N
// LLRs through in_valid/in_ready/in_llr (32 per accepted word, LLR k of the
// frame in lane k mod 32 of word k/32), raise start. done pulses in the last
// cycle of the decoding; the codeword is then in buffer cw_buf of the codeword
// RAM, read 32 bits at a time at cw_rd_addr of buffer cw_rd_buf. The next
// frame may be loaded during decoding. Defaults are the paper's: N = 1024,
// P = 512, 6-bit internal and 5-bit channel LLRs.
module fast_ssc_decoder
  import fssc_pkg::*;
#(
  parameter int N     = 1024,
  parameter int P     = 512,
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     imem_we,
  input  logic [$clog2(DEPTH)-1:0] imem_addr,
  input  instr_t                   imem_data,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  chllr_t [31:0]            in_llr,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic                     cw_buf,
  input  logic                     cw_rd_buf,
  input  logic [$clog2(N/32)-1:0]  cw_rd_addr,
  output logic [31:0]              cw_rd_data
);
  localparam int LANES = P / 2;
  localparam int CW    = (N > P) ? $clog2(N / P) : 1;

  instr_t                   instr;
  logic [$clog2(DEPTH)-1:0] pc;
  opcode_e                  op;
  logic [3:0]               log2nv;
  logic [CW-1:0]            chunk;
  logic                     alpha_we, beta_we, side, ch_buf, cw_wr_buf;
  logic [1:0]               ch_full, release_buf;

  logic                     ld_we, ld_buf;
  logic [$clog2(N/32)-1:0]  ld_addr;
  chllr_t [31:0]            ld_data;

  chllr_t [LANES-1:0]       ch_a, ch_b;
  llr_t   [LANES-1:0]       ar_a, ar_b, pa, pb, alpha_o;
  logic   [LANES-1:0]       b_l, b_r, b0_lo, b0_hi, b1_lo, b1_hi, br_lo, br_hi, cw_lo, cw_hi;
  logic                     br_we, cw_we;

  instr_ram #(.DEPTH(DEPTH)) u_imem (
    .clk, .wr_en(imem_we), .wr_addr(imem_addr), .wr_data(imem_data), .rd_addr(pc), .rd_data(instr));

  controller #(.N(N), .P(P), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .ch_full, .pc, .instr, .busy, .done, .op, .log2nv, .chunk,
    .alpha_we, .beta_we, .side, .ch_buf, .cw_wr_buf, .cw_buf, .release_buf);

  channel_loader #(.N(N), .W(32)) u_load (
    .clk, .rst_n, .in_valid, .in_ready, .in_llr, .wr_en(ld_we), .wr_buf(ld_buf),
    .wr_addr(ld_addr), .wr_data(ld_data), .full(ch_full), .release_buf);

  channel_ram #(.N(N), .P(P), .W(32)) u_chram (
    .clk, .wr_en(ld_we), .wr_buf(ld_buf), .wr_addr(ld_addr), .wr_data(ld_data),
    .rd_buf(ch_buf), .rd_chunk(chunk), .rd_a(ch_a), .rd_b(ch_b));

  alpha_ram #(.N(N), .P(P)) u_aram (
    .clk, .rd_lvl(log2nv), .rd_chunk(chunk), .rd_a(ar_a), .rd_b(ar_b),
    .wr_en(alpha_we), .wr_lvl(log2nv - 4'd1), .wr_chunk(chunk), .wr_data(alpha_o));

  alpha_router #(.N(N), .P(P)) u_arouter (
    .lvl(log2nv), .ch_a, .ch_b, .ar_a, .ar_b, .a(pa), .b(pb));

  processing_unit #(.P(P)) u_pu (
    .clk, .op, .log2nv, .alpha_a(pa), .alpha_b(pb), .beta0(b_l), .beta1(b_r),
    .alpha_o, .beta0_lo(b0_lo), .beta0_hi(b0_hi), .beta1_lo(b1_lo), .beta1_hi(b1_hi));

  beta_router #(.N(N), .P(P)) u_brouter (
    .we(beta_we), .lvl(log2nv), .beta0_lo(b0_lo), .beta0_hi(b0_hi), .beta1_lo(b1_lo),
    .beta1_hi(b1_hi), .br_we, .br_lo, .br_hi, .cw_we, .cw_lo, .cw_hi);

  beta_ram #(.N(N), .P(P)) u_bram (
    .clk, .rd_lvl(log2nv - 4'd1), .rd_chunk(chunk), .rd_l(b_l), .rd_r(b_r),
    .wr_en(br_we), .wr_side(side), .wr_lvl(log2nv), .wr_chunk(chunk), .wr_lo(br_lo), .wr_hi(br_hi));

  codeword_ram #(.N(N), .P(P)) u_cwram (
    .clk, .wr_en(cw_we), .wr_buf(cw_wr_buf), .wr_chunk(chunk), .wr_lo(cw_lo), .wr_hi(cw_hi),
    .rd_buf(cw_rd_buf), .rd_addr(cw_rd_addr), .rd_data(cw_rd_data));
endmodule
