// instr_ram: program memory holding the decoder tree as a list of node
// operations (fssc_pkg::instr_t). It is written from outside before decoding
// (wr_en/wr_addr/wr_data, one instruction per clock edge) and read
// combinationally by the controller at rd_addr. Changing the program changes
// the code the decoder handles (any code of length N), which makes the decoder
// rate-flexible. The depth of 1024 holds the tree of any length-1024 code and
// is this design's choice.
module instr_ram
  import fssc_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  instr_t                   wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output instr_t                   rd_data
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign rd_data = mem[rd_addr];
endmodule
