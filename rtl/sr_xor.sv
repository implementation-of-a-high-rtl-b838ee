// sr_xor: XOR submodule of the SR module (Step 1 of SR-node decoding).
//
// The first 2^SRstage LLRs of the 2P-LLR input are the LLRs of the SR node.
// They are copied 2^SeqNum times, one copy per repetition sequence, and copy
// l occupies positions l*2^SRstage .. (l+1)*2^SRstage-1 of the output. In copy
// l the sign of LLR t is XORed with s_l[t mod 2^(SRstage-SourceStage)], since
// every block of 2^(SRstage-SourceStage) LLRs that feeds one source-node LLR
// is weighted by the same sequence. Positions past 2^(SRstage+SeqNum) are zero,
// so that the adder tree that follows adds nothing there.
//
// seqs[l] holds sequence l, element m in bit m. Combinational.
module sr_xor
  import srfsc_pkg::*;
#(
  parameter int unsigned IN    = 128,
  parameter int unsigned NSEQ  = 4,
  parameter int unsigned SEQ_W = IN / 2
) (
  input  llr_t                            in  [IN],
  input  logic [NSEQ-1:0][SEQ_W-1:0]      seqs,
  input  logic [2:0]                      sr_stage,
  input  logic [2:0]                      src_stage,
  input  logic [1:0]                      seq_num,
  output llr_t                            out [IN]
);

  int unsigned nsr, dlog, nrep;

  always_comb begin
    nsr  = 1 << sr_stage;
    dlog = (sr_stage >= src_stage) ? int'(sr_stage) - int'(src_stage) : 0;
    nrep = 1 << seq_num;
    for (int unsigned p = 0; p < IN; p++) begin
      int unsigned l, t;
      l = p >> sr_stage;
      t = p & (nsr - 1);
      out[p] = '0;
      if (l < nrep && l < NSEQ) begin
        out[p]   = in[t];
        out[p].s = in[t].s ^ seqs[l][t & ((1 << dlog) - 1)];
        if (in[t].m == '0) out[p].s = 1'b0;
      end
    end
  end

endmodule
