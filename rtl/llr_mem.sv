// llr_mem: memory module holding the soft messages (LLRs) of the decoder.
//
// Two parts:
//  * channel LLRs, level n = log2(N) of the decoding tree: N values of QC
//    bits held in registers, N/(2P) rows of 2P, loaded a row per cycle
//    through the ch_* port before decoding;
//  * internal LLRs, levels 0..n-1: one node per level, the node on the
//    current path of the decoding tree. Stored in a memory of rows of P
//    QI-bit LLRs; level j takes max(1, 2^j/P) rows, levels packed one after
//    the other from level 0 (21 rows for N = 1024, P = 64).
//
// Read port: the 2P LLRs of chunk c of the node at level rd_level, i.e.
// entries 2P*c .. 2P*c+2P-1 (two consecutive rows). Nodes shorter than 2P
// occupy the low entries; the rest of the word is don't-care. Channel LLRs
// are widened to QI bits (magnitude zero-extended, no fraction bits in
// either format). Asynchronous read.
// Write port: P LLRs into chunk wr_chunk (entries P*c ..) of level wr_level,
// at the clock edge.
//
// Origin: the published design only says the memory stores all LLRs; the
// row layout per level and the separate channel array are this design's own.
module llr_mem
  import srfsc_pkg::*;
#(
  parameter int unsigned N  = 1024,
  parameter int unsigned P  = 64,
  parameter int unsigned LN = $clog2(N),
  parameter int unsigned LVW = $clog2(LN + 1),
  parameter int unsigned CW  = $clog2(N / P),
  parameter int unsigned CRW = $clog2(N / (2 * P))
) (
  input  logic                 clk,
  // channel load
  input  logic                 ch_we,
  input  logic [CRW-1:0]       ch_row,
  input  logic [2*P-1:0][QC-1:0] ch_llr,
  // read
  input  logic [LVW-1:0]       rd_level,
  input  logic [CW-1:0]        rd_chunk,
  output llr_t                 rd_data [2*P],
  // write
  input  logic                 wr_en,
  input  logic [LVW-1:0]       wr_level,
  input  logic [CW-1:0]        wr_chunk,
  input  llr_t                 wr_data [P]
);

  function automatic int unsigned row_base(int unsigned lvl);
    int unsigned b = 0;
    for (int unsigned j = 0; j < LN; j++)
      if (j < lvl) b += ((1 << j) > P) ? ((1 << j) / P) : 1;
    return b;
  endfunction

  localparam int unsigned ROWS  = row_base(LN);
  localparam int unsigned CROWS = N / (2 * P);
  localparam int unsigned RW    = $clog2(ROWS);

  logic [2*P-1:0][QC-1:0] ch_mem [CROWS];
  llr_t                   mem    [ROWS][P];

  always_ff @(posedge clk)
    if (ch_we) ch_mem[ch_row] <= ch_llr;

  logic [RW-1:0] wrow;
  assign wrow = RW'(row_base(32'(wr_level)) + wr_chunk);

  always_ff @(posedge clk)
    if (wr_en) mem[wrow] <= wr_data;

  int unsigned r0, r1;
  always_comb begin
    r0 = row_base(32'(rd_level)) + 2 * rd_chunk;
    r1 = r0 + 1;
    if (r0 >= ROWS) r0 = ROWS - 1;
    if (r1 >= ROWS) r1 = ROWS - 1;
    for (int unsigned i = 0; i < 2*P; i++) begin
      if (rd_level == LVW'(LN)) begin
        rd_data[i].s = ch_mem[rd_chunk[$clog2(CROWS)-1:0]][i][QC-1];
        rd_data[i].m = MW'(ch_mem[rd_chunk[$clog2(CROWS)-1:0]][i][QC-2:0]);
      end else if (i < P) begin
        rd_data[i] = mem[r0][i];
      end else begin
        rd_data[i] = mem[r1][i-P];
      end
    end
  end

endmodule
