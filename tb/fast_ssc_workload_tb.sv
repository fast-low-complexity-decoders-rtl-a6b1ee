// fast_ssc_workload_tb: decodes the two length-1024 code sizes of the
// published comparison, (1024,342) and (1024,512), at the decoder's default
// size. The frozen sets are built with the Bhattacharyya bound for an erasure
// channel (erasure probability 0.5 and 0.6); the published frozen sets are not
// available, so the cycle counts differ from the published ones and are
// printed. For each code the testbench turns the frozen set into a decoder
// tree and program, streams noise-free and noisy frames through the decoder
// and checks every estimate against the sent codeword (noise-free) or the
// reference decoder (noisy), and the busy-cycle count against the sum of the
// per-operation counts.
module fast_ssc_workload_tb;
  import fssc_pkg::*;
  import fssc_model_pkg::*;

  localparam int N = 1024, P = 512, NCODES = 2, NFRAMES = 4;
  localparam int KS[NCODES] = '{342, 512};
  localparam real Z0[NCODES] = '{0.6, 0.5};

  logic clk = 0, rst_n = 0;
  logic imem_we = 0;
  logic [9:0] imem_addr = '0;
  instr_t imem_data = '0;
  logic in_valid = 0, in_ready;
  chllr_t [31:0] in_llr = '0;
  logic start = 0, busy, done, cw_buf, cw_rd_buf = 0;
  logic [4:0] cw_rd_addr = '0;
  logic [31:0] cw_rd_data;

  fast_ssc_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int op_seen[14];
  int stalls = 0, chunked = 0, overlap = 0, busy_cycles = 0;

  always @(posedge clk) begin
    if (busy) begin
      op_seen[int'(dut.op)]++;
      busy_cycles++;
      if (dut.chunk != 0) chunked++;
      if (in_valid && in_ready) overlap++;
    end
    if (in_valid && !in_ready) stalls++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  code_model cm;
  ia_t frames_x[NFRAMES], frames_llr[NFRAMES];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic make_frames();
    for (int f = 0; f < NFRAMES; f++) begin
      ia_t u, y;
      u = new[N];
      y = new[N];
      foreach (u[i]) u[i] = (cm.frozen[i] != 0) ? 0 : int'($urandom_range(0, 1));
      frames_x[f] = cm.encode(u);
      foreach (y[i]) begin
        int v;
        v = (frames_x[f][i] != 0) ? -6 : 6;
        if (f % 2 == 1) v += int'($urandom_range(0, 12)) - 6 + int'($urandom_range(0, 12)) - 6;
        else            v += ((frames_x[f][i] != 0) ? -1 : 1) * int'($urandom_range(0, 9));
        y[i] = (v > 15) ? 15 : (v < -15) ? -15 : v;
      end
      frames_llr[f] = y;
    end
  endtask

  // drives at the falling edge, sees the handshake at the rising edge
  task automatic producer();
    for (int f = 0; f < NFRAMES; f++)
      for (int w = 0; w < N / 32; w++) begin
        bit taken;
        @(negedge clk);
        if ((w * 7 + f) % 5 == 0) begin  // an idle cycle in the stream
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        for (int k = 0; k < 32; k++) in_llr[k] = chllr_t'(frames_llr[f][w * 32 + k]);
        do begin
          @(posedge clk);
          taken = in_ready;
          if (!taken) @(negedge clk);
        end while (!taken);
      end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic consumer();
    for (int f = 0; f < NFRAMES; f++) begin
      int c0;
      ia_t expv, got;
      got = new[N];
      start <= 1;
      @(posedge clk);
      while (!busy) @(posedge clk);
      start <= 0;
      c0 = busy_cycles;
      while (!done) @(posedge clk);
      @(posedge clk);
      check(busy_cycles - c0 == cm.cycles,
            $sformatf("latency %0d, expected %0d", busy_cycles - c0, cm.cycles));
      cw_rd_buf <= cw_buf;
      for (int w = 0; w < N / 32; w++) begin
        cw_rd_addr <= 5'(w);
        #1;
        for (int k = 0; k < 32; k++) got[w * 32 + k] = int'(cw_rd_data[k]);
        @(posedge clk);
      end
      expv = cm.dec(0, N, frames_llr[f]);
      check(got == expv, $sformatf("frame %0d differs from reference", f));
      if (f % 2 == 0) check(got == frames_x[f], $sformatf("noise-free frame %0d not decoded", f));
    end
  endtask

  initial begin
    cm = new(N, P);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCODES; c++) begin
      check(cm.build_code(KS[c], Z0[c]), $sformatf("code %0d has a node type the decoder lacks", c));
      check(cm.info_bits() == KS[c], "wrong number of information bits");
      $display("code %0d: (%0d,%0d), %0d instructions, %0d cycles", c, N, cm.info_bits(),
               cm.prog.size(), cm.cycles);
      foreach (cm.prog[i]) begin
        @(negedge clk);
        imem_we = 1; imem_addr = 10'(i); imem_data = cm.prog[i];
      end
      @(negedge clk) imem_we = 0;
      make_frames();
      fork
        producer();
        consumer();
      join
    end
    check(chunked > 0, "no multi-chunk operation");
    check(stalls > 0, "input never stalled");
    check(overlap > 0, "no frame loaded during decoding");
    $display("mechanisms: stalls=%0d chunked=%0d load-during-decode=%0d", stalls, chunked, overlap);
    for (int o = 0; o < 14; o++) $display("  %s cycles=%0d", opcode_e'(o), op_seen[o]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
