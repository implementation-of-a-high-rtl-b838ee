// tb_max_tree: random test of the 2-layer compare-select tree that picks the
// repetition sequence with the largest metric: expected is the first index
// of the maximum among the first 2^(2-cmd) metrics. Small value ranges make
// ties frequent.
module tb_max_tree;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] v [4];
  logic [1:0] cmd;
  logic [1:0] idx;
  int checks = 0, failures = 0;
  max_tree u_dut (.v(v), .cmd(cmd), .idx(idx));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int e, n;
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 4; i++) v[i] = 6'($urandom_range((t % 2) ? 63 : 3));
      cmd = 2'($urandom_range(2));
      n = 1 << (2 - cmd);
      #1;
      e = 0;
      for (int i = 1; i < n; i++) if (v[i] > v[e]) e = i;
      checks++;
      if (int'(idx) != e) begin
        failures++;
        if (failures < 5) $display("cmd %0d: %0d, expected %0d", cmd, idx, e);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
