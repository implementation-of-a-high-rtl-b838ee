// tb_pe: exhaustive test of the processing element over all 6-bit
// sign-and-magnitude operand pairs, both partial-sum values and both
// functions, against integer f and g (saturated at +-31).
module tb_pe;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t a, b, y;
  logic beta, sel_g;
  int checks = 0, failures = 0;
  pe u_dut (.a(a), .b(b), .beta(beta), .sel_g(sel_g), .y(y));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int e;
    for (int x = -31; x <= 31; x++)
      for (int z = -31; z <= 31; z++)
        for (int m = 0; m < 4; m++) begin
          a = to_llr(x); b = to_llr(z); beta = m[0]; sel_g = m[1];
          #1;
          e = sel_g ? gg(x, z, beta) : ff(x, z);
          checks++;
          if ((y.s ? -int'(y.m) : int'(y.m)) != e || (y.m == 0 && y.s)) begin
            failures++;
            if (failures < 5) $display("a %0d b %0d beta %0d g %0d: %0d expected %0d", x, z, beta, sel_g, y.m, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
