// repseq_mem: memory of repetition sequences, addressed by NodeType.
//
// Entry t (1..ENTRIES-1) holds the repetition sequences of the SR-node type
// t: NSEQ sequences of up to SEQ_W bits each, sequence l in bits
// [l*SEQ_W +: SEQ_W], element m of a sequence in bit m. NodeType 0 stands for
// every SR node with a single, all-zero sequence; it is not stored and reads
// as zero. Entries are written before decoding; reads are asynchronous.
//
// Origin: NodeType as a pointer into this memory, with 0 meaning the
// all-zero sequence, is the published scheme; the word layout is this
// design's own.
module repseq_mem #(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned NSEQ    = 4,
  parameter int unsigned SEQ_W   = 64,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [NSEQ-1:0][SEQ_W-1:0] wdata,
  input  logic [AW-1:0]              raddr,
  output logic [NSEQ-1:0][SEQ_W-1:0] rdata
);

  logic [NSEQ-1:0][SEQ_W-1:0] mem [1:ENTRIES-1];

  always_ff @(posedge clk)
    if (we && waddr != '0) mem[waddr] <= wdata;

  assign rdata = (raddr == '0) ? '0 : mem[raddr];

endmodule
