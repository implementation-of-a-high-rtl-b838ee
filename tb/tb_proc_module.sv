// tb_proc_module: random test of the processing module: f and g of all P
// neighbouring pairs, Rate-0 (all-zero) and Rate-1 (hard decision) leaf
// estimates.
module tb_proc_module;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  pm_op_e op;
  llr_t a [128], y [64];
  logic [63:0] beta;
  logic [127:0] est;
  int checks = 0, failures = 0;
  proc_module u_dut (.op(op), .a(a), .beta(beta), .y(y), .est(est));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], e;
    logic [127:0] ee;
    v = new[128];
    for (int t = 0; t < 400; t++) begin
      foreach (v[i]) begin
        v[i] = $urandom_range(62) - 31;
        a[i] = to_llr(v[i]);
      end
      beta = {$urandom, $urandom};
      op = pm_op_e'($urandom_range(3));
      #1;
      if (op == PM_F || op == PM_G) begin
        for (int k = 0; k < 64; k++) begin
          e = (op == PM_G) ? gg(v[2*k], v[2*k+1], beta[k]) : ff(v[2*k], v[2*k+1]);
          checks++;
          if ((y[k].s ? -int'(y[k].m) : int'(y[k].m)) != e) begin
            failures++;
            if (failures < 5) $display("op %0d k %0d: %0d expected %0d", op, k, y[k].m, e);
          end
        end
      end else begin
        for (int i = 0; i < 128; i++) ee[i] = (op == PM_RATE1) ? (v[i] < 0) : 1'b0;
        checks++;
        if (est !== ee) begin
          failures++;
          if (failures < 5) $display("op %0d: estimate %h expected %h", op, est, ee);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
