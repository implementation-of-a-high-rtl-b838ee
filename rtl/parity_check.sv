// parity_check: parity check and bit flipping of the SPC nodes of a source
// node (Step 2 of SR-node decoding, Wagner decoding).
//
// The source-node LLRs of all repetition sequences come in side by side
// (2^(SourceStage+SeqNum) of them). Their hard decisions are split into SPC
// nodes of length L = 2^(SourceStage+1-FroNum): one per sequence for
// FroNum = 1, two for FroNum = 2 and four for FroNum = 3. The parity of each
// SPC node is compared with its constraint (even, or the parity bit par_odd
// when FroNum = 3) and, if it is not met, the bit at the least reliable
// position idx[g] found by the compare-select tree is flipped. With
// FroNum = 0 (Rate-1 source) the hard decisions pass unchanged.
// Combinational.
//
// Origin: hard decision plus Wagner bit flipping per SPC node follows the
// published Step 2; how the SPC nodes are laid out for FroNum = 2 and 3 is
// this design's reading.
module parity_check
  import srfsc_pkg::*;
#(
  parameter int unsigned IN   = 128,
  parameter int unsigned NSPC = 4,
  parameter int unsigned IW   = $clog2(IN)
) (
  input  llr_t            src [IN],
  input  logic [IW-1:0]   idx [NSPC],
  input  logic            par_odd,
  input  logic [2:0]      src_stage,
  input  logic [1:0]      fro_num,
  input  logic [1:0]      seq_num,
  output logic [IN-1:0]   bits
);

  int unsigned llog, nspc;
  logic        par;

  always_comb begin
    par = 1'b0;
    for (int unsigned p = 0; p < IN; p++) bits[p] = src[p].s;
    llog = (int'(src_stage) + 1 >= int'(fro_num)) ? int'(src_stage) + 1 - int'(fro_num) : 0;
    nspc = ((1 << (src_stage + seq_num)) >> llog);
    if (fro_num != 2'd0) begin
      for (int unsigned g = 0; g < NSPC; g++) begin
        if (g < nspc) begin
          par = 1'b0;
          for (int unsigned p = 0; p < IN; p++)
            if ((p >> llog) == g) par ^= src[p].s;
          if (par != ((fro_num == 2'd3) ? par_odd : 1'b0))
            bits[idx[g]] = ~bits[idx[g]];
        end
      end
    end
  end

endmodule
