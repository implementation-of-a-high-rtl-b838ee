// tb_cs_tree: random test of the 7-layer compare-select tree. For every
// group of 2^(7-cmd) inputs the expected f value is the product of the signs
// and the smallest magnitude, and the expected index the first position of
// the smallest magnitude.
module tb_cs_tree;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t in [128];
  logic [2:0] cmd;
  llr_t val [4];
  logic [6:0] idx [4];
  int checks = 0, failures = 0;
  cs_tree u_dut (.in(in), .cmd(cmd), .val(val), .idx(idx));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], d, ev, ei, len;
    v = new[128];
    for (int t = 0; t < 400; t++) begin
      foreach (v[i]) begin
        v[i] = $urandom_range(62) - 31;
        in[i] = to_llr(v[i]);
      end
      cmd = 3'($urandom_range(7));
      d = 7 - cmd;
      len = 1 << d;
      #1;
      for (int o = 0; o < 4; o++) begin
        if (o < (128 >> d)) begin
          ev = v[o * len]; ei = o * len;
          for (int i = 1; i < len; i++) begin
            ev = ff(ev, v[o * len + i]);
            if (iabs(v[o * len + i]) < iabs(v[ei])) ei = o * len + i;
          end
        end else begin
          ev = 0; ei = 0;
        end
        checks++;
        if ((val[o].s ? -int'(val[o].m) : int'(val[o].m)) != ev || int'(idx[o]) != ei) begin
          failures++;
          if (failures < 5) $display("cmd %0d out %0d: %0d@%0d, expected %0d@%0d", cmd, o, val[o].m, idx[o], ev, ei);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
