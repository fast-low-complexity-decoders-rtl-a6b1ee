// controller: runs the decoder-tree program for one frame at a time.
//
// When start is high, the controller is idle and the channel buffer it reads
// next is full, it begins at instruction 0. Each instruction is one node
// operation and occupies the processing unit for a fixed number of cycles:
//   F, G, G_0R, Combine, Combine_0R, R1 : ceil(Nv/P) cycles, one chunk of
//                                          P/2 LLR or bit pairs per cycle;
//   RSPC, 0SPC                           : ceil(Nv/P) + 4 cycles (SPC pipeline);
//   Rep, Rep1, RepSPC, 01, 001, 0RepSPC  : 1 cycle.
// The next instruction starts in the cycle after, so a frame takes the sum of
// these counts plus the start cycle (done is a one-cycle pulse in the last
// cycle of the last instruction). LLR results (F, G) are written to the
// alpha-RAM one level down; bit results to the beta-RAM at the node's level,
// or to the codeword RAM for the root. At the end the channel buffer is
// released to the loader and the codeword buffer index, cw_buf, flips so
// outside logic can read the finished estimate while the next frame runs.
// Cycle counts follow the paper; the program format and the start/release
// handshake are this design's own.
module controller
  import fssc_pkg::*;
#(
  parameter int N     = 1024,
  parameter int P     = 512,
  localparam int CW   = (N > P) ? $clog2(N / P) : 1,
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [1:0]               ch_full,
  output logic [$clog2(DEPTH)-1:0] pc,
  input  instr_t                   instr,
  output logic                     busy,
  output logic                     done,
  output opcode_e                  op,
  output logic [3:0]               log2nv,
  output logic [CW-1:0]            chunk,
  output logic                     alpha_we,
  output logic                     beta_we,
  output logic                     side,
  output logic                     ch_buf,
  output logic                     cw_wr_buf,
  output logic                     cw_buf,
  output logic [1:0]               release_buf
);
  localparam int LOGP = $clog2(P);

  logic [7:0] cyc_q, ncyc;
  logic       spc_op, last_cyc;

  assign op     = instr.op;
  assign log2nv = instr.log2nv;
  assign side   = instr.side;
  assign spc_op = (op == OP_RSPC) || (op == OP_0SPC);

  always_comb begin
    unique case (op)
      OP_F, OP_G, OP_G0R, OP_COMB, OP_COMB0R, OP_R1:
        ncyc = (int'(log2nv) > LOGP) ? 8'(1 << (int'(log2nv) - LOGP)) : 8'd1;
      OP_RSPC, OP_0SPC:
        ncyc = ((int'(log2nv) > LOGP) ? 8'(1 << (int'(log2nv) - LOGP)) : 8'd1) + 8'd4;
      default:
        ncyc = 8'd1;
    endcase
  end

  assign chunk    = spc_op ? '0 : CW'(cyc_q);
  assign last_cyc = (cyc_q == ncyc - 8'd1);
  assign alpha_we = busy && (op == OP_F || op == OP_G || op == OP_G0R);
  assign beta_we  = busy && !(op == OP_F || op == OP_G || op == OP_G0R) && (!spc_op || last_cyc);
  assign done     = busy && last_cyc && instr.last;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy        <= 1'b0;
      pc          <= '0;
      cyc_q       <= '0;
      ch_buf      <= 1'b0;
      cw_wr_buf   <= 1'b0;
      cw_buf      <= 1'b1;
      release_buf <= '0;
    end else begin
      release_buf <= '0;
      if (!busy) begin
        if (start && ch_full[ch_buf]) begin
          busy  <= 1'b1;
          pc    <= '0;
          cyc_q <= '0;
        end
      end else if (!last_cyc) begin
        cyc_q <= cyc_q + 8'd1;
      end else begin
        cyc_q <= '0;
        if (instr.last) begin
          busy                <= 1'b0;
          release_buf[ch_buf] <= 1'b1;
          ch_buf              <= ~ch_buf;
          cw_buf              <= cw_wr_buf;
          cw_wr_buf           <= ~cw_wr_buf;
        end else begin
          pc <= pc + 1'b1;
        end
      end
    end

  // SPC-based nodes are supported up to Nv = P (one chunk)
  assert property (@(posedge clk) disable iff (!rst_n) busy && spc_op |-> int'(log2nv) <= LOGP);
endmodule
