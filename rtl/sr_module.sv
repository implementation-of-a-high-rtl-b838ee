// sr_module: decoder for one sequence-repetition (SR) node.
//
// An SR node of 2^SRstage bits is a subtree whose left-hand descendants are
// Rate-0 or repetition nodes, down to a source node of 2^SourceStage bits at
// its right-hand end. Its estimate is the source-node estimate repeated in
// blocks of 2^(SRstage-SourceStage) bits, each block XORed with one of
// 2^SeqNum repetition sequences. The module evaluates all sequences in
// parallel in three steps:
//
//   Step 1  sr_xor copies the node LLRs once per sequence with the sequence
//           applied to the signs; the 7-layer adder tree sums each block into
//           one source-node LLR (layer chosen by Cmd1). Up to 16 results are
//           registered. When SRstage = SourceStage there is nothing to sum and
//           the input LLRs go straight to Step 2.
//   Step 2  the 7-layer compare-select tree finds, for every SPC node of the
//           source node, its f value and least reliable position (layer chosen
//           by Cmd4), registered; the 2-layer adder tree gives the parity of a
//           FroNum = 3 source node; parity_check flips bits; sr_bits_gen
//           expands the source estimate of the chosen sequence.
//   Step 3  (in parallel with Step 2) the 4-layer magnitude adder tree sums
//           |LLR| per sequence (layer chosen by Cmd2), registered; the 2-layer
//           CS tree picks the sequence with the largest sum (Cmd3). The
//           index is 0 when SeqNum = 0.
//
// Timing: the three pipeline registers are the ones of the published block
// diagram. The input LLRs, the instruction fields, the commands and the
// sequences must stay constant while a node is decoded; bits is valid
// SR_LAT = 2 clock cycles after they were first applied. The controller
// holds them and waits that long with a counter.
// The NodeType field (instr[2:0]) is not read here: the top uses it to fetch
// seqs from the repetition sequence memory, so lint reports it as unused.
module sr_module
  import srfsc_pkg::*;
#(
  parameter int unsigned P     = 64,
  parameter int unsigned NSEQ  = 4,    // largest number of repetition sequences
  parameter int unsigned NSRC  = 16,   // largest 2^(SourceStage+SeqNum) after Step 1
  parameter int unsigned NSPC  = 4,    // largest number of parallel SPC nodes
  parameter int unsigned IN    = 2 * P,
  parameter int unsigned L1    = $clog2(IN),     // layers of the Step-1 and CS trees
  parameter int unsigned L3    = $clog2(NSRC),   // layers of the Step-3 adder tree
  parameter int unsigned L4    = $clog2(NSEQ),   // layers of the Step-3 CS tree
  parameter int unsigned SEQ_W = P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  llr_t                      in   [IN],
  input  logic [NSEQ-1:0][SEQ_W-1:0] seqs,
  input  instr_t                    instr,
  input  logic [$clog2(L1+1)-1:0]   cmd1,
  input  logic [$clog2(L3+1)-1:0]   cmd2,
  input  logic [$clog2(L4+1)-1:0]   cmd3,
  input  logic [$clog2(L1+1)-1:0]   cmd4,
  output logic [IN-1:0]             bits
);

  localparam int unsigned IW = $clog2(IN);
  localparam int unsigned LW = (NSEQ > 1) ? $clog2(NSEQ) : 1;

  // ---------------- Step 1 ----------------
  llr_t xo   [IN];
  llr_t at_o [NSRC];
  llr_t at_q [NSRC];

  sr_xor #(.IN(IN), .NSEQ(NSEQ), .SEQ_W(SEQ_W)) u_xor (
    .in(in), .seqs(seqs), .sr_stage(instr.sr_stage), .src_stage(instr.src_stage),
    .seq_num(instr.seq_num), .out(xo));

  sm_adder_tree #(.IN(IN), .LAYERS(L1), .OUT(NSRC)) u_add7 (
    .in(xo), .cmd(cmd1), .out(at_o));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < NSRC; i++) at_q[i] <= '0;
    else        at_q <= at_o;

  // Source-node LLRs: adder-tree result, or the node LLRs themselves.
  llr_t src [IN];
  always_comb
    for (int unsigned i = 0; i < IN; i++)
      if (instr.sr_stage == instr.src_stage) src[i] = in[i];
      else                                   src[i] = (i < NSRC) ? at_q[i] : '0;

  // ---------------- Step 2 ----------------
  llr_t          cs_v [NSPC];
  logic [IW-1:0] cs_i [NSPC];
  llr_t          cs_vq [NSPC];
  logic [IW-1:0] cs_iq [NSPC];

  cs_tree #(.IN(IN), .LAYERS(L1), .OUT(NSPC)) u_cs7 (
    .in(src), .cmd(cmd4), .val(cs_v), .idx(cs_i));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NSPC; i++) begin
        cs_vq[i] <= '0;
        cs_iq[i] <= '0;
      end
    end else begin
      cs_vq <= cs_v;
      cs_iq <= cs_i;
    end

  llr_t par_sum [1];
  sm_adder_tree #(.IN(NSPC), .LAYERS($clog2(NSPC)), .OUT(1)) u_add2 (
    .in(cs_vq), .cmd('0), .out(par_sum));

  logic par_odd;
  assign par_odd = (instr.fro_num == 2'd3) ? par_sum[0].s : 1'b0;

  logic [IN-1:0] src_bits;
  parity_check #(.IN(IN), .NSPC(NSPC)) u_pc (
    .src(src), .idx(cs_iq), .par_odd(par_odd), .src_stage(instr.src_stage),
    .fro_num(instr.fro_num), .seq_num(instr.seq_num), .bits(src_bits));

  // ---------------- Step 3 ----------------
  logic [MW-1:0] mags [NSRC];
  logic [QI-1:0] msum  [NSEQ];
  logic [QI-1:0] msumq [NSEQ];
  logic [LW-1:0] lmax, lhat;

  always_comb for (int i = 0; i < NSRC; i++) mags[i] = at_q[i].m;

  mag_adder_tree #(.IN(NSRC), .LAYERS(L3), .OUT(NSEQ), .W(QI)) u_add4 (
    .mag(mags), .cmd(cmd2), .out(msum));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < NSEQ; i++) msumq[i] <= '0;
    else        msumq <= msum;

  max_tree #(.IN(NSEQ), .LAYERS(L4), .W(QI)) u_cs2 (
    .v(msumq), .cmd(cmd3), .idx(lmax));

  assign lhat = (instr.seq_num == 2'd0) ? '0 : lmax;

  sr_bits_gen #(.IN(IN), .NSEQ(NSEQ), .SEQ_W(SEQ_W)) u_gen (
    .src_bits(src_bits), .lhat(lhat), .seqs(seqs), .sr_stage(instr.sr_stage),
    .src_stage(instr.src_stage), .bits(bits));

endmodule
