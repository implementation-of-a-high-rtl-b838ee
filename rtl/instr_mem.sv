// instr_mem: instruction memory of the controller.
//
// Holds the pre-compiled list of leaf instructions of the pruned decoding
// tree, in the order the tree is visited. It is written before decoding,
// one instruction per cycle through the write port, and read asynchronously
// at the controller's program counter.
//
// Origin: an instruction memory read in visiting order is the published
// scheme; the depth of 256 and the asynchronous read are this design's own.
module instr_mem
  import srfsc_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  instr_t        wdata,
  input  logic [AW-1:0] raddr,
  output instr_t        rdata
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
