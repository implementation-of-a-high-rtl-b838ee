// sm_adder_tree: sign-and-magnitude adder tree with output-layer selection.
//
// Layer 0 is the input vector. Layer d+1 holds the saturating sums of
// neighbouring pairs of layer d, so entry i of layer d is the sum of inputs
// i*2^d .. i*2^d+2^d-1. The layer taken to the output is LAYERS - cmd: the
// command counts down from the top of the tree, as Cmd1 does in the SR
// module (Cmd1 = 7 - (SRstage - SourceStage)). The first OUT entries of that
// layer are output; entries the layer does not have read as zero.
//
// Used twice in the SR module: as the 7-layer tree of Step 1 (IN = 2P = 128,
// OUT = 16) and as the 2-layer tree (IN = 4, OUT = 1) that turns the four SPC
// LLRs into the parity of a FroNum = 3 source node. Each adder compares
// magnitudes, because its operands are signed. Every sum saturates at the
// internal LLR width QI, as the published data widths (16Q, 4Q) imply.
// Purely combinational.
module sm_adder_tree
  import srfsc_pkg::*;
#(
  parameter int unsigned IN     = 128,
  parameter int unsigned LAYERS = 7,
  parameter int unsigned OUT    = 16,
  parameter int unsigned CMDW   = $clog2(LAYERS + 1)
) (
  input  llr_t            in  [IN],
  input  logic [CMDW-1:0] cmd,
  output llr_t            out [OUT]
);

  llr_t lay [LAYERS+1][IN];
  int unsigned sel;

  always_comb begin
    for (int unsigned d = 0; d <= LAYERS; d++)
      for (int unsigned i = 0; i < IN; i++)
        lay[d][i] = '0;
    for (int unsigned i = 0; i < IN; i++) lay[0][i] = in[i];
    for (int unsigned d = 0; d < LAYERS; d++)
      for (int unsigned i = 0; i < (IN >> (d + 1)); i++)
        lay[d+1][i] = sm_add(lay[d][2*i], lay[d][2*i+1]);
    sel = (int'(cmd) > int'(LAYERS)) ? 0 : LAYERS - int'(cmd);
    for (int unsigned o = 0; o < OUT; o++)
      out[o] = (o < (IN >> sel)) ? lay[sel][o] : '0;
  end

endmodule
