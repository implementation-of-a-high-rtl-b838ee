// mag_adder_tree: adder tree over LLR magnitudes (Step 3 of SR decoding).
//
// Sums |alpha| of the source-node LLRs separately for every repetition
// sequence, the metric of the sequence selection. Layer d+1 adds neighbouring
// pairs of layer d; the output layer is LAYERS - cmd (Cmd2 = 4 - SourceStage
// in the SR module, so the layer index equals SourceStage and entry l is the
// metric of sequence l). All operands are non-negative, so each adder is a
// plain unsigned adder with no magnitude comparison. Sums saturate at W bits
// (the 4Q output width of the published design, W = QI). Combinational.
module mag_adder_tree
  import srfsc_pkg::*;
#(
  parameter int unsigned IN     = 16,
  parameter int unsigned LAYERS = 4,
  parameter int unsigned OUT    = 4,
  parameter int unsigned W      = QI,
  parameter int unsigned CMDW   = $clog2(LAYERS + 1)
) (
  input  logic [MW-1:0]   mag [IN],
  input  logic [CMDW-1:0] cmd,
  output logic [W-1:0]    out [OUT]
);

  logic [W-1:0] lay [LAYERS+1][IN];
  logic [W:0]   s;
  int unsigned  sel;

  always_comb begin
    for (int unsigned d = 0; d <= LAYERS; d++)
      for (int unsigned i = 0; i < IN; i++)
        lay[d][i] = '0;
    for (int unsigned i = 0; i < IN; i++) lay[0][i] = W'(mag[i]);
    for (int unsigned d = 0; d < LAYERS; d++)
      for (int unsigned i = 0; i < (IN >> (d + 1)); i++) begin
        s = {1'b0, lay[d][2*i]} + {1'b0, lay[d][2*i+1]};
        lay[d+1][i] = s[W] ? '1 : s[W-1:0];
      end
    sel = (int'(cmd) > int'(LAYERS)) ? 0 : LAYERS - int'(cmd);
    for (int unsigned o = 0; o < OUT; o++)
      out[o] = (o < (IN >> sel)) ? lay[sel][o] : '0;
  end

endmodule
