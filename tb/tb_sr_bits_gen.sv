// tb_sr_bits_gen: random test of SR bits generation: output k*2^D + m must be
// source bit lhat*2^SourceStage + k XOR bit m of sequence lhat
// (D = SRstage - SourceStage), zero from 2^SRstage on.
module tb_sr_bits_gen;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [127:0] src_bits, bits;
  logic [1:0] lhat;
  seqs_t seqs;
  logic [2:0] sr_stage, src_stage;
  int checks = 0, failures = 0;
  sr_bits_gen u_dut (.src_bits(src_bits), .lhat(lhat), .seqs(seqs), .sr_stage(sr_stage),
                     .src_stage(src_stage), .bits(bits));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int j, r, d;
    logic [127:0] e;
    for (int it = 0; it < 500; it++) begin
      j = $urandom_range(7, 1);
      r = $urandom_range(j, 1);
      d = j - r;
      src_bits = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 4; i++) seqs[i] = {$urandom, $urandom};
      lhat = (r + 2 <= 7) ? 2'($urandom_range(3)) : 2'd0;
      sr_stage = 3'(j); src_stage = 3'(r);
      #1;
      e = '0;
      for (int k = 0; k < (1 << r); k++)
        for (int m = 0; m < (1 << d); m++)
          e[k * (1 << d) + m] = src_bits[lhat * (1 << r) + k] ^ seqs[lhat][m];
      checks++;
      if (bits !== e) begin
        failures++;
        if (failures < 5) $display("j %0d r %0d lhat %0d: %h expected %h", j, r, lhat, bits, e);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
