// tb_psn: drives the partial sum network with the leaf estimates of the
// compiled code P(1024,512) for random information bits, each leaf estimate
// being the encoding of its own bits. Before each leaf the partial sums of
// its left sibling (read chunk by chunk, as the g function does) must equal
// the encoding of the sibling's bits; after the last leaf the codeword must
// equal the encoding of all bits. A second frame checks clear.
module tb_psn;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  localparam int N = 1024, P = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, est_valid = 0, cw_valid;
  logic [2:0] est_stage = '0;
  logic [9:0] est_idx = '0;
  logic [2*P-1:0] est_bits = '0;
  logic [3:0] ps_level = '0, ps_chunk = '0;
  logic [P-1:0] ps_bits;
  logic [N-1:0] codeword;
  int checks = 0, failures = 0;
  psn u_dut (.clk(clk), .rst_n(rst_n), .clear(clear), .est_valid(est_valid),
             .est_stage(est_stage), .est_idx(est_idx), .est_bits(est_bits),
             .ps_level(ps_level), .ps_chunk(ps_chunk), .ps_bits(ps_bits),
             .codeword(codeword), .cw_valid(cw_valid));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    bit u [], x [], sub [], xs [];
    int b, s, gl, len;
    pw_construct(N, 512);
    compile(N, P);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 3; fr++) begin
      u = new[N];
      foreach (u[i]) u[i] = frozen[i] ? 1'b0 : 1'($urandom);
      encode(u, x);
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (cw_valid) failures++;
      b = 0;
      foreach (prog[pi]) begin
        s = prog[pi].sr_stage;
        if (b > 0) begin
          gl = 1;
          while (((b >> (gl - 1)) & 1) == 0) gl++;
          len = 1 << (gl - 1);
          sub = new[len];
          foreach (sub[k]) sub[k] = u[b - len + k];
          encode(sub, xs);
          ps_level = 4'(gl - 1);
          for (int c = 0; c < ((len > P) ? len / P : 1); c++) begin
            ps_chunk = 4'(c);
            #1;
            checks++;
            for (int k = 0; k < P && c * P + k < len; k++)
              if (ps_bits[k] != xs[c * P + k]) begin
                failures++;
                if (failures < 5) $display("leaf %0d: partial sum %0d of level %0d wrong", pi, c * P + k, gl - 1);
                break;
              end
          end
        end
        sub = new[1 << s];
        foreach (sub[k]) sub[k] = u[b + k];
        encode(sub, xs);
        @(negedge clk);
        est_valid = 1; est_stage = 3'(s); est_idx = 10'(b);
        est_bits = '0;
        foreach (xs[k]) est_bits[k] = xs[k];
        @(negedge clk);
        est_valid = 0;
        b += 1 << s;
      end
      checks++;
      for (int i = 0; i < N; i++)
        if (codeword[i] != x[i] || !cw_valid) begin
          failures++;
          $display("frame %0d: codeword bit %0d wrong", fr, i);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
