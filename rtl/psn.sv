// psn: partial sum network.
//
// Collects the hard estimates (beta) of the leaves of the decoding tree and
// combines them upwards. A leaf of 2^s bits starting at bit index idx is
// the right child at level s when bit s of idx is set. Right children are
// combined with the stored left sibling into their parent,
//   parent[2k] = left[k] XOR right[k],   parent[2k+1] = right[k],
// and the walk goes on at the next level; the first left child met on the way
// up is stored as the partial sums of its level (bl[level]), where the g
// function of its right sibling will read them. All of this happens in the
// cycle the estimate arrives. When the walk passes the root, the result is
// the estimated codeword (in the order of the channel LLRs) and cw_valid is
// set; clear starts a new frame.
//
// ps_bits returns bits ps_chunk*P .. ps_chunk*P+P-1 of the partial sums of
// level ps_level, one bit per PE for the g function. Asynchronous read.
//
// Origin: the published design only names the PSN; the per-level partial
// sum registers and the one-cycle combine chain are this design's own.
module psn #(
  parameter int unsigned N   = 1024,
  parameter int unsigned P   = 64,
  parameter int unsigned LN  = $clog2(N),
  parameter int unsigned LVW = $clog2(LN + 1),
  parameter int unsigned CW  = $clog2(N / P)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             est_valid,
  input  logic [2:0]       est_stage,
  input  logic [LN-1:0]    est_idx,
  input  logic [2*P-1:0]   est_bits,
  input  logic [LVW-1:0]   ps_level,
  input  logic [CW-1:0]    ps_chunk,
  output logic [P-1:0]     ps_bits,
  output logic [N-1:0]     codeword,
  output logic             cw_valid
);

  logic [N-1:0] bl   [LN];
  logic [N-1:0] bl_n [LN];
  logic [N-1:0] cur, cmb;
  logic         act, reach_root;

  always_comb begin
    cur = '0;
    cur[2*P-1:0] = est_bits;
    for (int unsigned i = 2*P; i < N; i++) cur[i] = 1'b0;
    cmb = '0;
    act = 1'b1;
    for (int unsigned l = 0; l < LN; l++) bl_n[l] = bl[l];
    for (int unsigned l = 0; l < LN; l++) begin
      if (act && l >= est_stage) begin
        if (est_idx[l]) begin
          cmb = '0;
          for (int unsigned k = 0; k < N/2; k++)
            if (k < (1 << l)) begin
              cmb[2*k]   = bl[l][k] ^ cur[k];
              cmb[2*k+1] = cur[k];
            end
          cur = cmb;
        end else begin
          bl_n[l] = cur;
          act = 1'b0;
        end
      end
    end
    reach_root = act;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int unsigned l = 0; l < LN; l++) bl[l] <= '0;
      codeword <= '0;
      cw_valid <= 1'b0;
    end else if (clear) begin
      cw_valid <= 1'b0;
    end else if (est_valid) begin
      bl <= bl_n;
      if (reach_root) begin
        codeword <= cur;
        cw_valid <= 1'b1;
      end
    end

  assign ps_bits = bl[ps_level < LVW'(LN) ? ps_level : '0][int'(ps_chunk) * P +: P];

endmodule
