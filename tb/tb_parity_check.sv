// tb_parity_check: random test of the parity-check and bit-flipping unit.
// For each source node shape (SourceStage, FroNum, SeqNum) the SPC groups,
// their least reliable positions and the expected flips are worked out from
// the LLRs in the testbench; the odd-parity case (FroNum = 3) is driven both
// ways.
module tb_parity_check;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t src [128];
  logic [6:0] idx [4];
  logic par_odd;
  logic [2:0] src_stage;
  logic [1:0] fro_num, seq_num;
  logic [127:0] bits;
  int checks = 0, failures = 0, flips = 0;
  parity_check u_dut (.src(src), .idx(idx), .par_odd(par_odd), .src_stage(src_stage),
                      .fro_num(fro_num), .seq_num(seq_num), .bits(bits));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], r, fro, w, len, n, mp;
    bit p;
    logic [127:0] e;
    v = new[128];
    for (int it = 0; it < 600; it++) begin
      fro = $urandom_range(3);
      w = (fro == 3) ? 0 : ((fro == 2) ? $urandom_range(1) : $urandom_range(2));
      r = (fro == 3) ? $urandom_range(5, 2) : $urandom_range((w > 0) ? 4 - w : 7, (fro == 0) ? 1 : 1);
      if (fro == 3 && r < 2) r = 2;
      foreach (v[i]) begin
        v[i] = $urandom_range(30) - 15;
        src[i] = to_llr(v[i]);
      end
      src_stage = 3'(r); fro_num = 2'(fro); seq_num = 2'(w);
      par_odd = 1'($urandom);
      e = '0;
      for (int i = 0; i < 128; i++) e[i] = v[i] < 0;
      for (int g = 0; g < 4; g++) idx[g] = '0;
      if (fro > 0) begin
        len = 1 << (r + 1 - fro);
        n = (1 << (r + w)) / len;
        for (int g = 0; g < n; g++) begin
          mp = g * len;
          p = 0;
          for (int i = 0; i < len; i++) begin
            if (iabs(v[g * len + i]) < iabs(v[mp])) mp = g * len + i;
            p ^= (v[g * len + i] < 0);
          end
          idx[g] = 7'(mp);
          if (p != ((fro == 3) ? par_odd : 1'b0)) begin
            e[mp] = ~e[mp];
            flips++;
          end
        end
      end
      #1;
      checks++;
      if (bits !== e) begin
        failures++;
        if (failures < 5) $display("r %0d fro %0d w %0d: %h expected %h", r, fro, w, bits, e);
      end
      @(posedge clk);
    end
    checks++;
    if (flips == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
