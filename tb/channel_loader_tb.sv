// channel_loader_tb: N = 128 (four 32-LLR words per frame). A source offers
// words with random gaps; the testbench checks that each accepted word is
// written to the next address of the current buffer, that a buffer is marked
// full after its last word, that the source is stalled while the next buffer
// is still full, and that a release pulse lets loading continue.
`include "tb_common.svh"
module channel_loader_tb;
  import fssc_pkg::*;
  localparam int N = 128, W = 32, WORDS = N / W;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, wr_en, wr_buf;
  chllr_t [W-1:0] in_llr, wr_data;
  logic [1:0] wr_addr, full, release_buf = '0;
  int exp_buf = 0, exp_addr = 0, frames = 0;
  bit exp_full[2];
  channel_loader #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  // reference model, updated on every edge
  always @(posedge clk) if (rst_n) begin
    `CHECK(in_ready == !exp_full[exp_buf], "ready does not match buffer state")
    `CHECK(full == {exp_full[1], exp_full[0]}, "full flags")
    for (int b = 0; b < 2; b++) if (release_buf[b]) exp_full[b] = 0;
    if (in_valid && !in_ready) stalls++;
    if (in_valid && in_ready) begin
      `CHECK(wr_en && wr_buf == exp_buf[0] && int'(wr_addr) == exp_addr && wr_data == in_llr,
             $sformatf("write of word %0d of buffer %0d", exp_addr, exp_buf))
      if (exp_addr == WORDS - 1) begin exp_full[exp_buf] = 1; exp_buf ^= 1; exp_addr = 0; frames++; end
      else exp_addr++;
    end else `CHECK(!wr_en, "write without handshake")
  end
  // source
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < W; k++) in_llr[k] = chllr_t'(int'($urandom_range(0, 30)) - 15);
    end
  end
  // consumer: releases full buffers in order after a random delay
  initial begin
    automatic int nb = 0;
    @(posedge rst_n);
    while (frames < 20) begin
      @(negedge clk);
      release_buf = '0;
      if (full[nb] && $urandom_range(0, 15) == 0) begin release_buf[nb] = 1; nb ^= 1; end
    end
    @(negedge clk) release_buf = '0;
    `CHECK(stalls > 0, "source never stalled")
    `TB_END
  end
endmodule
