// sr_bits_gen: SR bits generation (last part of Step 2 of SR-node decoding).
//
// Takes the source-node estimate that belongs to the selected repetition
// sequence lhat (bits lhat*2^SourceStage .. of the parity-checked vector) and
// expands it to the 2^SRstage bits of the SR node: output block k, of length
// 2^(SRstage-SourceStage), is source bit k XOR the sequence s_lhat.
// Outputs past 2^SRstage are zero. Combinational.
//
// Origin: the published Step 2 XORs the source estimate with the chosen
// sequence to form the SR node's bits; the indexing is this design's own.
module sr_bits_gen #(
  parameter int unsigned IN    = 128,
  parameter int unsigned NSEQ  = 4,
  parameter int unsigned SEQ_W = IN / 2,
  parameter int unsigned LW    = $clog2(NSEQ)
) (
  input  logic [IN-1:0]              src_bits,
  input  logic [LW-1:0]              lhat,
  input  logic [NSEQ-1:0][SEQ_W-1:0] seqs,
  input  logic [2:0]                 sr_stage,
  input  logic [2:0]                 src_stage,
  output logic [IN-1:0]              bits
);

  int unsigned dlog;

  always_comb begin
    dlog = (sr_stage >= src_stage) ? int'(sr_stage) - int'(src_stage) : 0;
    for (int unsigned q = 0; q < IN; q++) begin
      int unsigned k, sidx;
      logic [$clog2(SEQ_W)-1:0] m;
      k    = q >> dlog;
      m    = $bits(m)'(q & ((1 << dlog) - 1));
      sidx = (int'(lhat) << src_stage) + k;
      bits[q] = 1'b0;
      if (q < (1 << sr_stage) && sidx < IN)
        bits[q] = src_bits[sidx] ^ seqs[lhat][m];
    end
  end

endmodule
