// controller_tb: runs a short program at the default size (N = 1024, P = 512)
// and checks, cycle by cycle, the program counter, chunk index and write
// enables, the per-instruction cycle counts (ceil(Nv/P), +4 for SPC nodes,
// 1 for leaves), the done pulse, the buffer release and the codeword buffer
// swap. A start without a full channel buffer must be ignored.
`include "tb_common.svh"
module controller_tb;
  import fssc_pkg::*;
  localparam int N = 1024, P = 512, DEPTH = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, alpha_we, beta_we, side;
  logic ch_buf, cw_wr_buf, cw_buf;
  logic [1:0] ch_full = '0, release_buf;
  logic [9:0] pc;
  instr_t instr;
  opcode_e op;
  logic [3:0] log2nv;
  logic chunk;
  instr_t prog[8];
  int exp_cyc[8];
  controller #(.N(N), .P(P), .DEPTH(DEPTH)) dut (.*);
  assign instr = prog[pc % 8];
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)
  function automatic instr_t mk(opcode_e o, int l, bit sd, bit last);
    mk.op = o; mk.log2nv = 4'(l); mk.side = sd; mk.last = last;
  endfunction
  initial begin
    prog[0] = mk(OP_F, 10, 0, 0);       exp_cyc[0] = 2;
    prog[1] = mk(OP_RSPC, 9, 0, 0);     exp_cyc[1] = 5;
    prog[2] = mk(OP_G, 10, 1, 0);       exp_cyc[2] = 2;
    prog[3] = mk(OP_REP, 5, 0, 0);      exp_cyc[3] = 1;
    prog[4] = mk(OP_0SPC, 6, 1, 0);     exp_cyc[4] = 5;
    prog[5] = mk(OP_COMB, 9, 1, 0);     exp_cyc[5] = 1;
    prog[6] = mk(OP_COMB, 10, 0, 1);    exp_cyc[6] = 2;
    prog[7] = '0;                       exp_cyc[7] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      automatic logic b0 = ch_buf, w0 = cw_wr_buf;
      @(negedge clk);
      start = 1; ch_full = '0;
      @(negedge clk);
      `CHECK(!busy, "started without a full channel buffer")
      ch_full[ch_buf] = 1;
      @(negedge clk);
      start = 0;
      `CHECK(busy && pc == 0, "did not start")
      for (int i = 0; i < 7; i++)
        for (int c = 0; c < exp_cyc[i]; c++) begin
          automatic bit spc = (prog[i].op == OP_RSPC || prog[i].op == OP_0SPC);
          automatic bit aw = (prog[i].op == OP_F || prog[i].op == OP_G);
          `CHECK(busy && int'(pc) == i, $sformatf("frame %0d instr %0d cycle %0d: pc=%0d", f, i, c, pc))
          `CHECK(chunk == (spc ? 1'b0 : 1'(c)), $sformatf("instr %0d chunk", i))
          `CHECK(alpha_we == aw, $sformatf("instr %0d alpha_we", i))
          `CHECK(beta_we == (!aw && (!spc || c == exp_cyc[i] - 1)), $sformatf("instr %0d beta_we", i))
          `CHECK(done == (i == 6 && c == exp_cyc[i] - 1), $sformatf("instr %0d done", i))
          `CHECK(op == prog[i].op && log2nv == prog[i].log2nv && side == prog[i].side, "fields")
          @(negedge clk);
        end
      `CHECK(!busy, "still busy after the last instruction")
      `CHECK(release_buf == (b0 ? 2'b10 : 2'b01), "channel buffer not released")
      `CHECK(ch_buf == !b0 && cw_buf == w0 && cw_wr_buf == !w0, "buffers not swapped")
    end
    `TB_END
  end
endmodule
