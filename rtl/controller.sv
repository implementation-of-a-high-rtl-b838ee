// controller: schedules the decoding of one frame.
//
// The decoder walks the SC decoding tree depth first, left child first, but
// only down to the leaves named by the instruction list: every instruction is
// one leaf, an SR node of 2^SRstage bits (Rate-0 and Rate-1 nodes included),
// in visiting order. Tree state is the bit index idx of the next leaf and the
// level cur whose node LLRs are in memory. For each instruction:
//
//   F     while cur > SRstage: f function from level cur to cur-1, in
//         max(1, 2^cur/2P) cycles of P processing elements.
//   leaf  Rate-0 (FroNum = 2, SourceStage = 1, SeqNum = 0) and Rate-1
//         (FroNum = 0, SeqNum = 0, SourceStage = SRstage): the processing
//         module decodes it in the same cycle (SR module bypassed).
//         Any other node: its LLRs are held at the SR module input, a counter
//         is loaded with SR_LAT-1 and all updates wait until it reaches zero;
//         the SR module's estimate is then taken (1 + SR_LAT cycles).
//   next  the estimate goes to the PSN, idx grows by 2^SRstage and the
//         program counter by one. If idx = N the frame is done. Otherwise the
//         next leaf lies in the right subtree of the node at level
//         L = (trailing zeros of idx) + 1, and
//   G     the g function from level L to L-1 runs, using the left sibling's
//         partial sums from the PSN, in max(1, 2^L/2P) cycles; cur = L-1.
//
// The Cmd signals of the SR module are derived from the instruction:
// Cmd1 = L1-(SRstage-SourceStage), Cmd2 = L3-SourceStage, Cmd3 = L4-SeqNum,
// Cmd4 = L1 for FroNum = 0, else L1-1-SourceStage+FroNum (L1 = 7, L3 = 4,
// L4 = 2 for P = 64), i.e. the published formulas.
// done is a one-cycle pulse after the last leaf's estimate has been taken.
// The NodeType field (instr[2:0]) is not used here: the top feeds it straight
// to the repetition sequence memory, so lint reports those bits as unused.
module controller
  import srfsc_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned P      = 64,
  parameter int unsigned DEPTH  = 256,   // instruction memory depth
  parameter int unsigned SR_LAT = 2,     // SR module pipeline registers
  parameter int unsigned L1     = $clog2(2 * P),
  parameter int unsigned L3     = 4,
  parameter int unsigned L4     = 2,
  parameter int unsigned LN     = $clog2(N),
  parameter int unsigned LVW    = $clog2(LN + 1),
  parameter int unsigned CW     = $clog2(N / P),
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // instruction fetch
  output logic [AW-1:0]           pc,
  input  instr_t                  instr,
  // LLR memory
  output logic [LVW-1:0]          rd_level,
  output logic [CW-1:0]           rd_chunk,
  output logic                    wr_en,
  output logic [LVW-1:0]          wr_level,
  output logic [CW-1:0]           wr_chunk,
  // processing module
  output pm_op_e                  pm_op,
  // PSN
  output logic                    psn_clear,
  output logic                    est_valid,
  output logic                    est_from_sr,
  output logic [2:0]              est_stage,
  output logic [LN-1:0]           est_idx,
  output logic [LVW-1:0]          ps_level,
  output logic [CW-1:0]           ps_chunk,
  // SR module
  output logic [$clog2(L1+1)-1:0] cmd1,
  output logic [$clog2(L3+1)-1:0] cmd2,
  output logic [$clog2(L4+1)-1:0] cmd3,
  output logic [$clog2(L1+1)-1:0] cmd4
);

  typedef enum logic [2:0] {S_IDLE, S_NODE, S_SR_WAIT, S_G, S_DONE} state_e;

  state_e         state;
  logic [LN:0]    idx;       // bit index of the next leaf (N when finished)
  logic [LVW-1:0] cur;       // level whose node LLRs are in memory
  logic [LVW-1:0] gl;        // level of the g step
  logic [CW-1:0]  chunk;
  logic [1:0]     cnt;       // SR wait counter

  logic is_rate0, is_rate1, is_sr, leaf_done;
  logic [LVW-1:0] s_lvl;
  logic [LN:0]    idx_nxt;
  logic [LVW-1:0] l_nxt;

  function automatic logic [CW-1:0] last_chunk(logic [LVW-1:0] lvl);
    return (int'(lvl) > int'(L1)) ? CW'((1 << lvl) / (2 * P) - 1) : '0;
  endfunction

  assign s_lvl    = LVW'(instr.sr_stage);
  assign is_rate0 = instr.fro_num == 2'd2 && instr.src_stage == 3'd1 && instr.seq_num == 2'd0;
  assign is_rate1 = instr.fro_num == 2'd0 && instr.seq_num == 2'd0 &&
                    instr.src_stage == instr.sr_stage;
  assign is_sr    = !is_rate0 && !is_rate1;

  // Command signals for the SR module.
  always_comb begin
    cmd1 = $bits(cmd1)'(int'(L1) - (int'(instr.sr_stage) - int'(instr.src_stage)));
    cmd2 = (int'(instr.src_stage) <= int'(L3)) ? $bits(cmd2)'(int'(L3) - int'(instr.src_stage)) : '0;
    cmd3 = $bits(cmd3)'(int'(L4) - int'(instr.seq_num));
    cmd4 = (instr.fro_num == 2'd0) ? $bits(cmd4)'(L1)
         : $bits(cmd4)'(int'(L1) - 1 - int'(instr.src_stage) + int'(instr.fro_num));
  end

  // Next leaf position and the level of the following g step.
  always_comb begin
    idx_nxt = idx + ((LN+1)'(1) << instr.sr_stage);
    l_nxt   = LVW'(LN);
    for (int i = LN - 1; i >= 0; i--)
      if (idx_nxt[i]) l_nxt = LVW'(i + 1);
  end

  always_comb begin
    rd_level    = cur;
    rd_chunk    = chunk;
    wr_en       = 1'b0;
    wr_level    = cur - 1'b1;
    wr_chunk    = chunk;
    pm_op       = PM_F;
    est_valid   = 1'b0;
    est_from_sr = 1'b0;
    ps_level    = gl - 1'b1;
    ps_chunk    = chunk;
    leaf_done   = 1'b0;
    unique case (state)
      S_NODE: begin
        if (cur > s_lvl) begin
          wr_en = 1'b1;
        end else if (!is_sr) begin
          rd_chunk  = '0;
          pm_op     = is_rate1 ? PM_RATE1 : PM_RATE0;
          est_valid = 1'b1;
          leaf_done = 1'b1;
        end else begin
          rd_chunk = '0;
        end
      end
      S_SR_WAIT: begin
        rd_chunk = '0;
        if (cnt == '0) begin
          est_valid   = 1'b1;
          est_from_sr = 1'b1;
          leaf_done   = 1'b1;
        end
      end
      S_G: begin
        rd_level = gl;
        pm_op    = PM_G;
        wr_en    = 1'b1;
        wr_level = gl - 1'b1;
      end
      default: ;
    endcase
  end

  assign est_stage = instr.sr_stage;
  assign est_idx   = idx[LN-1:0];
  assign busy      = state != S_IDLE && state != S_DONE;
  assign psn_clear = start && state == S_IDLE;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      cur   <= LVW'(LN);
      gl    <= LVW'(LN);
      chunk <= '0;
      cnt   <= '0;
      pc    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_NODE;
          idx   <= '0;
          cur   <= LVW'(LN);
          chunk <= '0;
          pc    <= '0;
        end
        S_NODE: begin
          if (cur > s_lvl) begin
            if (chunk == last_chunk(cur)) begin
              chunk <= '0;
              cur   <= cur - 1'b1;
            end else begin
              chunk <= chunk + 1'b1;
            end
          end else if (is_sr) begin
            cnt   <= 2'(SR_LAT - 1);
            state <= S_SR_WAIT;
          end
        end
        S_SR_WAIT: if (cnt != '0) cnt <= cnt - 1'b1;
        S_G: begin
          if (chunk == last_chunk(gl)) begin
            chunk <= '0;
            cur   <= gl - 1'b1;
            state <= S_NODE;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (leaf_done) begin
        idx <= idx_nxt;
        pc  <= pc + 1'b1;
        if (idx_nxt[LN]) begin
          state <= S_DONE;
          done  <= 1'b1;
        end else begin
          gl    <= l_nxt;
          chunk <= '0;
          state <= S_G;
        end
      end
    end

  // A leaf can only be reached from above, and an SR node must fit the
  // 2P-LLR input of the SR module. (No disable iff: in reset the state is
  // S_IDLE, so neither antecedent can hold.)
  a_leaf_above: assert property (@(posedge clk)
    state == S_NODE |-> cur >= s_lvl);
  a_sr_fits: assert property (@(posedge clk)
    (state == S_NODE && cur == s_lvl && is_sr) |->
      (int'(instr.sr_stage) + int'(instr.seq_num) <= int'(L1)));

endmodule
