// max_tree: compare-select tree that finds the index of the largest metric.
//
// Step 3 of SR decoding picks the repetition sequence whose source-node LLRs
// have the largest sum of magnitudes. Each unit keeps the larger of two
// metrics and its index (the lower index on a tie). The output is taken from
// layer LAYERS - cmd (Cmd3 = 2 - SeqNum), i.e. the maximum over the first
// 2^SeqNum metrics. Combinational.
//
// Origin: the 2-layer tree selected by Cmd3 is the published Step-3 design;
// the tie rule (lower index wins) is this design's own.
module max_tree #(
  parameter int unsigned IN     = 4,
  parameter int unsigned LAYERS = 2,
  parameter int unsigned W      = 6,
  parameter int unsigned IW     = (IN > 1) ? $clog2(IN) : 1,
  parameter int unsigned CMDW   = $clog2(LAYERS + 1)
) (
  input  logic [W-1:0]    v   [IN],
  input  logic [CMDW-1:0] cmd,
  output logic [IW-1:0]   idx
);

  logic [W-1:0]  lv [LAYERS+1][IN];
  logic [IW-1:0] li [LAYERS+1][IN];
  logic [CMDW-1:0] sel;

  always_comb begin
    for (int unsigned d = 0; d <= LAYERS; d++)
      for (int unsigned i = 0; i < IN; i++) begin
        lv[d][i] = '0;
        li[d][i] = '0;
      end
    for (int unsigned i = 0; i < IN; i++) begin
      lv[0][i] = v[i];
      li[0][i] = IW'(i);
    end
    for (int unsigned d = 0; d < LAYERS; d++)
      for (int unsigned i = 0; i < (IN >> (d + 1)); i++) begin
        if (lv[d][2*i+1] > lv[d][2*i]) begin
          lv[d+1][i] = lv[d][2*i+1];
          li[d+1][i] = li[d][2*i+1];
        end else begin
          lv[d+1][i] = lv[d][2*i];
          li[d+1][i] = li[d][2*i];
        end
      end
    sel = (int'(cmd) > int'(LAYERS)) ? '0 : CMDW'(int'(LAYERS) - int'(cmd));
    idx = li[sel][0];
  end

endmodule
