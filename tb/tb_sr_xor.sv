// tb_sr_xor: random test of the XOR submodule. For random stages, SeqNum
// and sequences, output p must be input (p mod 2^SRstage) with its sign
// XORed with bit (p mod 2^(SRstage-SourceStage)) of sequence p / 2^SRstage,
// and zero from 2^(SRstage+SeqNum) on.
module tb_sr_xor;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t in [128], out [128];
  seqs_t seqs;
  logic [2:0] sr_stage, src_stage;
  logic [1:0] seq_num;
  int checks = 0, failures = 0;
  sr_xor u_dut (.in(in), .seqs(seqs), .sr_stage(sr_stage), .src_stage(src_stage),
                .seq_num(seq_num), .out(out));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int v [], j, r, w, e, l, t;
    v = new[128];
    for (int it = 0; it < 300; it++) begin
      w = $urandom_range(2);
      j = $urandom_range(7 - w, 1);
      r = $urandom_range(j, 1);
      foreach (v[i]) begin
        v[i] = $urandom_range(20) - 10;
        in[i] = to_llr(v[i]);
      end
      for (int i = 0; i < 4; i++) seqs[i] = {$urandom, $urandom};
      sr_stage = 3'(j); src_stage = 3'(r); seq_num = 2'(w);
      #1;
      for (int p = 0; p < 128; p++) begin
        l = p >> j; t = p % (1 << j);
        e = (l < (1 << w)) ? (seqs[l][t % (1 << (j - r))] ? -v[t] : v[t]) : 0;
        checks++;
        if ((out[p].s ? -int'(out[p].m) : int'(out[p].m)) != e) begin
          failures++;
          if (failures < 5) $display("j %0d r %0d w %0d p %0d: got %0d expected %0d", j, r, w, p, out[p].m, e);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
