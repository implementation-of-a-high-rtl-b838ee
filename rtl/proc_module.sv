// proc_module: processing module, P processing elements working in parallel.
//
// Each cycle it takes up to 2P LLRs of one node (a chunk read from the LLR
// memory) and, for op = PM_F or PM_G, PE k turns the pair (a[2k], a[2k+1])
// into LLR k of the left or right child; for PM_G, beta[k] is partial-sum
// bit k of the left sibling supplied by the PSN. The P results are written
// back to the memory. For Rate-0 and Rate-1 leaves the controller bypasses
// the SR module and the module decodes the leaf at once: est is all zero
// (Rate-0) or the hard decision of every input LLR (Rate-1).
// Combinational.
//
// Origin: P PEs handling 2P LLRs follow the published design; producing the
// Rate-0 and Rate-1 estimates here (the SR module bypass) is this design's
// reading of the bypass.
module proc_module
  import srfsc_pkg::*;
#(
  parameter int unsigned P = 64
) (
  input  pm_op_e          op,
  input  llr_t            a    [2*P],
  input  logic [P-1:0]    beta,
  output llr_t            y    [P],
  output logic [2*P-1:0]  est
);

  for (genvar k = 0; k < P; k++) begin : g_pe
    pe u_pe (.a(a[2*k]), .b(a[2*k+1]), .beta(beta[k]), .sel_g(op == PM_G), .y(y[k]));
  end

  always_comb
    for (int unsigned i = 0; i < 2*P; i++)
      est[i] = (op == PM_RATE1) ? a[i].s : 1'b0;

endmodule
