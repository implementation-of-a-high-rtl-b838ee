// srfsc_decoder: Fast-SSC polar decoder with sequence-repetition (SR) nodes.
//
// Decodes one polar codeword of N bits from N channel LLRs. A controller
// walks the pruned SC decoding tree given by an instruction list (one
// instruction per leaf); P processing elements compute the f and g functions
// between tree levels; Rate-0 and Rate-1 leaves are decided in the processing
// module; every other leaf is an SR node decoded by the SR module in
// 1 + SR_LAT cycles; the partial sum network (PSN) combines the leaf
// estimates into partial sums and, at the end, the codeword.
//
// Use: write the instruction list (imem_*), the repetition sequences of the
// SR-node types the code uses (rs_*, NodeType 1..7) and the N channel LLRs
// (ch_*, 2P per row, QC-bit sign and magnitude) while idle; pulse start.
// busy is high while decoding; done pulses once and codeword (with cw_valid)
// then holds the estimate until the next start. The instruction list and
// sequences depend only on the code, so they can stay for many frames.
//
// Timing: an f or g step on a node of 2^l LLRs takes max(1, 2^l/2P) cycles,
// a Rate-0/Rate-1 leaf one cycle and an SR node 1 + SR_LAT = 3 cycles; the
// P(1024,512) code of the test takes 224 cycles from start to done.
//
// The split into controller, LLR memory, processing module, SR module and
// PSN, the instruction fields, the SR module's trees and the Q(6,4,0)
// quantisation follow the published SRFSC architecture. The memory layout,
// the PSN structure, the load ports, the placement of the SR pipeline
// registers and the Rate-0/Rate-1 instruction codes are this design's own.
module srfsc_decoder
  import srfsc_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned P       = 64,
  parameter int unsigned DEPTH   = 256,  // instruction memory depth
  parameter int unsigned NTYPES  = 8,    // NodeType values (0 = all-zero sequence)
  parameter int unsigned NSEQ    = 4,    // repetition sequences per SR node, at most
  parameter int unsigned LN      = $clog2(N),
  parameter int unsigned CW      = $clog2(N / P),
  parameter int unsigned CRW     = $clog2(N / (2 * P)),
  parameter int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // instruction memory load
  input  logic                        imem_we,
  input  logic [AW-1:0]               imem_addr,
  input  instr_t                      imem_data,
  // repetition-sequence memory load
  input  logic                        rs_we,
  input  logic [$clog2(NTYPES)-1:0]   rs_addr,
  input  logic [NSEQ-1:0][P-1:0]      rs_data,
  // channel LLR load
  input  logic                        ch_we,
  input  logic [CRW-1:0]              ch_row,
  input  logic [2*P-1:0][QC-1:0]      ch_llr,
  // decoding
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [N-1:0]                codeword,
  output logic                        cw_valid
);

  localparam int unsigned LVW = $clog2(LN + 1);
  localparam int unsigned L1  = $clog2(2 * P);
  localparam int unsigned L3  = 4;   // Step-3 adder tree: 16 source LLRs
  localparam int unsigned L4  = $clog2(NSEQ);

  logic [AW-1:0]           pc;
  instr_t                  instr;
  logic [LVW-1:0]          rd_level, wr_level, ps_level;
  logic [CW-1:0]           rd_chunk, wr_chunk, ps_chunk;
  logic                    wr_en;
  pm_op_e                  pm_op;
  logic                    psn_clear, est_valid, est_from_sr;
  logic [2:0]              est_stage;
  logic [LN-1:0]           est_idx;
  logic [$clog2(L1+1)-1:0] cmd1, cmd4;
  logic [$clog2(L3+1)-1:0] cmd2;
  logic [$clog2(L4+1)-1:0] cmd3;

  llr_t                    rd_data [2*P];
  llr_t                    pm_y    [P];
  logic [2*P-1:0]          pm_est, sr_est, est_bits;
  logic [P-1:0]            ps_bits;
  logic [NSEQ-1:0][P-1:0]  seqs;

  instr_mem #(.DEPTH(DEPTH)) u_imem (
    .clk(clk), .we(imem_we), .waddr(imem_addr), .wdata(imem_data),
    .raddr(pc), .rdata(instr));

  repseq_mem #(.ENTRIES(NTYPES), .NSEQ(NSEQ), .SEQ_W(P)) u_rsmem (
    .clk(clk), .we(rs_we), .waddr(rs_addr), .wdata(rs_data),
    .raddr($clog2(NTYPES)'(instr.node_type)), .rdata(seqs));

  controller #(.N(N), .P(P), .DEPTH(DEPTH), .SR_LAT(2), .L1(L1), .L3(L3), .L4(L4)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .pc(pc), .instr(instr),
    .rd_level(rd_level), .rd_chunk(rd_chunk), .wr_en(wr_en), .wr_level(wr_level),
    .wr_chunk(wr_chunk), .pm_op(pm_op), .psn_clear(psn_clear), .est_valid(est_valid),
    .est_from_sr(est_from_sr), .est_stage(est_stage), .est_idx(est_idx),
    .ps_level(ps_level), .ps_chunk(ps_chunk),
    .cmd1(cmd1), .cmd2(cmd2), .cmd3(cmd3), .cmd4(cmd4));

  llr_mem #(.N(N), .P(P)) u_mem (
    .clk(clk), .ch_we(ch_we), .ch_row(ch_row), .ch_llr(ch_llr),
    .rd_level(rd_level), .rd_chunk(rd_chunk), .rd_data(rd_data),
    .wr_en(wr_en), .wr_level(wr_level), .wr_chunk(wr_chunk), .wr_data(pm_y));

  proc_module #(.P(P)) u_pm (
    .op(pm_op), .a(rd_data), .beta(ps_bits), .y(pm_y), .est(pm_est));

  sr_module #(.P(P), .NSEQ(NSEQ), .NSRC(1 << L3), .NSPC(4)) u_sr (
    .clk(clk), .rst_n(rst_n), .in(rd_data), .seqs(seqs), .instr(instr),
    .cmd1(cmd1), .cmd2(cmd2), .cmd3(cmd3), .cmd4(cmd4), .bits(sr_est));

  assign est_bits = est_from_sr ? sr_est : pm_est;

  psn #(.N(N), .P(P)) u_psn (
    .clk(clk), .rst_n(rst_n), .clear(psn_clear), .est_valid(est_valid),
    .est_stage(est_stage), .est_idx(est_idx), .est_bits(est_bits),
    .ps_level(ps_level), .ps_chunk(ps_chunk), .ps_bits(ps_bits),
    .codeword(codeword), .cw_valid(cw_valid));

endmodule
