// tb_mag_adder_tree: random test of the 4-layer magnitude adder tree
// (16 magnitudes, 4 outputs). Expected values are pairwise integer sums
// saturated at 63.
module tb_mag_adder_tree;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [MW-1:0] mag [16];
  logic [2:0] cmd;
  logic [QI-1:0] out [4];
  int checks = 0, failures = 0;
  mag_adder_tree u_dut (.mag(mag), .cmd(cmd), .out(out));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], d, e;
    v = new[16];
    for (int t = 0; t < 400; t++) begin
      foreach (v[i]) begin
        v[i] = $urandom_range((t % 2) ? 31 : 4);
        mag[i] = MW'(v[i]);
      end
      cmd = 3'($urandom_range(4));
      d = 4 - cmd;
      #1;
      for (int o = 0; o < 4; o++) begin
        e = (o < (16 >> d)) ? tree_sum(v, o << d, 1 << d, 63) : 0;
        checks++;
        if (int'(out[o]) != e) begin
          failures++;
          if (failures < 5) $display("cmd %0d out %0d = %0d, expected %0d", cmd, o, out[o], e);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
