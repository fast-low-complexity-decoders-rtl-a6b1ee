// instr_ram_tb: writes random instructions to every address, then reads them
// back in random order; a write takes effect at the clock edge.
`include "tb_common.svh"
module instr_ram_tb;
  import fssc_pkg::*;
  localparam int DEPTH = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  instr_t wr_data, rd_data;
  instr_t model[DEPTH];
  instr_ram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  `TB_WATCHDOG(1000000)
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(i); wr_data = instr_t'($urandom); model[i] = wr_data;
      rd_addr = 10'(i);
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      rd_addr = 10'($urandom);
      #1 `CHECK(rd_data == model[rd_addr], $sformatf("addr %0d", rd_addr))
    end
    // write timing: new data visible only after the edge
    @(negedge clk);
    wr_en = 1; wr_addr = 10'd5; wr_data = ~model[5]; rd_addr = 10'd5;
    #1 `CHECK(rd_data == model[5], "data changed before the clock edge")
    @(posedge clk) #1 `CHECK(rd_data == ~model[5], "data not written at the clock edge")
    `TB_END
  end
endmodule
