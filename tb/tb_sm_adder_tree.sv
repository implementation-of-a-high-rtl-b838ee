// tb_sm_adder_tree: random test of the sign-and-magnitude adder tree
// (128 inputs, 7 layers, 16 outputs). For every command value the outputs
// are compared with a pairwise integer sum of the matching input groups,
// saturated at +-31 after every layer.
module tb_sm_adder_tree;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t in [128];
  logic [2:0] cmd;
  llr_t out [16];
  int checks = 0, failures = 0;
  sm_adder_tree u_dut (.in(in), .cmd(cmd), .out(out));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], d, e, lim;
    v = new[128];
    for (int t = 0; t < 400; t++) begin
      lim = (t % 2) ? 31 : 3;
      foreach (v[i]) begin
        v[i] = $urandom_range(2 * lim) - lim;
        in[i] = to_llr(v[i]);
      end
      cmd = 3'($urandom_range(7));
      d = 7 - cmd;
      #1;
      for (int o = 0; o < 16; o++) begin
        e = (o < (128 >> d)) ? tree_sum(v, o << d, 1 << d, 31) : 0;
        checks++;
        if ((out[o].s ? -int'(out[o].m) : int'(out[o].m)) != e) begin
          failures++;
          if (failures < 5) $display("cmd %0d out %0d = %0d, expected %0d", cmd, o, out[o].m, e);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
