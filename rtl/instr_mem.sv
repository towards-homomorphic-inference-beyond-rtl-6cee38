// instr_mem: non-volatile instruction memory of one column of computation
// arrays.
//
// Each word is one 40-bit instruction (rodent_pkg::instr_t). All drivers read
// the same address, the program counter broadcast by the controller, so each
// column's memory holds that column's part of one common program, word for
// word aligned. The memory is a plain synchronous array: a read requested in
// one cycle (re, raddr) returns rdata after the next clock edge. The write
// port loads the program. The contents are non-volatile and are never reset.
// The depth is this design's choice; the accelerator description gives no
// program length.
module instr_mem
  import rodent_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
