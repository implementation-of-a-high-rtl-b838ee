// srfsc_pkg: types and constants shared by the SR-node Fast-SSC polar decoder.
//
// LLRs are carried in sign-and-magnitude form, the representation the
// processing elements and the SR-node trees work in. Internal LLRs have
// QI = 6 bits (1 sign bit, 5 magnitude bits) and channel LLRs QC = 4 bits,
// both with no fraction bits: the Q(6,4,0) quantisation of the published
// design. A channel LLR is widened to QI bits by zero-extending its magnitude,
// which keeps its value.
//
// An instruction describes one leaf of the pruned decoding tree (13 bits for
// P = 64): SRstage, SourceStage, FroNum, SeqNum and NodeType, in this order
// from the most significant bit. The widths are those of the P = 64 example;
// FroNum has 2 bits (values 0..3). The field order follows the drawing of the
// instruction word; the bit positions are this design's choice.
//
// Linting a module that uses the package but not QC reports QC as unused;
// QC is used by llr_mem and the top.
package srfsc_pkg;

  localparam int unsigned QI = 6;   // internal LLR width (sign + magnitude)
  localparam int unsigned QC = 4;   // channel LLR width (sign + magnitude)
  localparam int unsigned MW = QI - 1;  // internal magnitude width
  localparam int unsigned MAXMAG = (1 << MW) - 1;

  typedef struct packed {
    logic          s;   // 1 = negative
    logic [MW-1:0] m;   // magnitude
  } llr_t;

  typedef struct packed {
    logic [2:0] sr_stage;   // SRstage: level of the SR node (1..7)
    logic [2:0] src_stage;  // SourceStage: level of its source node
    logic [1:0] fro_num;    // FroNum: frozen bits at the left of the source node
    logic [1:0] seq_num;    // SeqNum: log2 of the number of repetition sequences
    logic [2:0] node_type;  // NodeType: pointer into the repetition-sequence memory
  } instr_t;


  // Operation of the processing module in one cycle.
  typedef enum logic [1:0] {
    PM_F     = 2'd0,  // left-child LLRs:  f(a, b)
    PM_G     = 2'd1,  // right-child LLRs: g(a, b, beta)
    PM_RATE0 = 2'd2,  // Rate-0 leaf: all-zero estimate
    PM_RATE1 = 2'd3   // Rate-1 leaf: hard decision on every LLR
  } pm_op_e;

  // f function, min-sum form: sign product, smaller magnitude.
  function automatic llr_t f_fn(llr_t a, llr_t b);
    llr_t r;
    r.s = a.s ^ b.s;
    r.m = (a.m < b.m) ? a.m : b.m;
    if (r.m == '0) r.s = 1'b0;  // one zero
    return r;
  endfunction

  // Saturating sign-and-magnitude addition a + b.
  function automatic llr_t sm_add(llr_t a, llr_t b);
    llr_t r;
    logic [MW:0] sum;
    if (a.s == b.s) begin
      sum = {1'b0, a.m} + {1'b0, b.m};
      r.s = a.s;
      r.m = sum[MW] ? MW'(MAXMAG) : sum[MW-1:0];
    end else if (a.m >= b.m) begin
      r.s = a.s;
      r.m = a.m - b.m;
    end else begin
      r.s = b.s;
      r.m = b.m - a.m;
    end
    if (r.m == '0) r.s = 1'b0;  // one zero
    return r;
  endfunction

  // g function: (-1)^beta * a + b.
  function automatic llr_t g_fn(llr_t a, llr_t b, logic beta);
    llr_t an;
    an.s = a.s ^ beta;
    an.m = a.m;
    return sm_add(an, b);
  endfunction

endpackage
