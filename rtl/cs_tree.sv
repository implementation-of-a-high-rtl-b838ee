// cs_tree: compare-select tree for single-parity-check (SPC) decoding.
//
// Each unit of the tree applies the f function to two LLRs (product of signs,
// smaller magnitude) and passes on the index of the input with the smaller
// magnitude. Entry i of layer d therefore holds, for the group of inputs
// i*2^d .. i*2^d+2^d-1, the f function of the whole group (whose sign is the
// parity of the group's hard decisions) and the position of its least
// reliable input. The output layer is LAYERS - cmd (Cmd4 = 7 for FroNum = 0,
// else 6 - SourceStage + FroNum), so that each output belongs to one SPC node
// of length 2^(SourceStage+1-FroNum). The first OUT (= 4, the largest number
// of parallel SPC nodes) entries are output; on equal magnitudes the lower
// index wins. Combinational.
//
// Origin: the 7-layer compare-select tree running the f function, with its
// output layer chosen by Cmd4, is the published Step-2 design; the tie rule
// (lower index wins) is this design's own.
module cs_tree
  import srfsc_pkg::*;
#(
  parameter int unsigned IN     = 128,
  parameter int unsigned LAYERS = 7,
  parameter int unsigned OUT    = 4,
  parameter int unsigned IW     = $clog2(IN),
  parameter int unsigned CMDW   = $clog2(LAYERS + 1)
) (
  input  llr_t            in   [IN],
  input  logic [CMDW-1:0] cmd,
  output llr_t            val  [OUT],
  output logic [IW-1:0]   idx  [OUT]
);

  llr_t          lv [LAYERS+1][IN];
  logic [IW-1:0] li [LAYERS+1][IN];
  int unsigned   sel;

  always_comb begin
    for (int unsigned d = 0; d <= LAYERS; d++)
      for (int unsigned i = 0; i < IN; i++) begin
        lv[d][i] = '0;
        li[d][i] = '0;
      end
    for (int unsigned i = 0; i < IN; i++) begin
      lv[0][i] = in[i];
      li[0][i] = IW'(i);
    end
    for (int unsigned d = 0; d < LAYERS; d++)
      for (int unsigned i = 0; i < (IN >> (d + 1)); i++) begin
        lv[d+1][i] = f_fn(lv[d][2*i], lv[d][2*i+1]);
        li[d+1][i] = (lv[d][2*i+1].m < lv[d][2*i].m) ? li[d][2*i+1] : li[d][2*i];
      end
    sel = (int'(cmd) > int'(LAYERS)) ? 0 : LAYERS - int'(cmd);
    for (int unsigned o = 0; o < OUT; o++) begin
      val[o] = (o < (IN >> sel)) ? lv[sel][o] : '0;
      idx[o] = (o < (IN >> sel)) ? li[sel][o] : '0;
    end
  end

endmodule
