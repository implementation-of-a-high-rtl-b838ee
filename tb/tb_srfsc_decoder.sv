// tb_srfsc_decoder: end-to-end test of the decoder at its default size
// (N = 1024, P = 64).
//
// For each of the three codes P(1024,256), P(1024,512) and P(1024,768)
// (polarization-weight construction) the testbench compiles the instruction
// list and repetition sequences, loads them, then decodes frames: random
// information bits, encoded, sent over BPSK/AWGN (noise-free frames and
// frames at 1.5 to 4 dB), quantised to 4-bit channel LLRs. Each decoded
// codeword is compared bit for bit with the integer reference model, the
// busy time with the model's cycle count, and noise-free frames with the
// transmitted codeword. It counts how often each mechanism ran (f and g
// steps, Rate-0 and Rate-1 bypass, SR stall, SR Step 1, several repetition
// sequences, each FroNum, parity flips) and fails if one never did.
module tb_srfsc_decoder;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;

  localparam int N = 1024;
  localparam int P = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    imem_we = 0, rs_we = 0, ch_we = 0, start = 0;
  logic [7:0]              imem_addr = '0;
  instr_t                  imem_data = '0;
  logic [2:0]              rs_addr = '0;
  logic [3:0][P-1:0]       rs_data = '0;
  logic [2:0]              ch_row = '0;
  logic [2*P-1:0][QC-1:0]  ch_llr = '0;
  logic                    busy, done, cw_valid;
  logic [N-1:0]            codeword;

  srfsc_decoder u_dut (
    .clk(clk), .rst_n(rst_n),
    .imem_we(imem_we), .imem_addr(imem_addr), .imem_data(imem_data),
    .rs_we(rs_we), .rs_addr(rs_addr), .rs_data(rs_data),
    .ch_we(ch_we), .ch_row(ch_row), .ch_llr(ch_llr),
    .start(start), .busy(busy), .done(done), .codeword(codeword), .cw_valid(cw_valid));

  int checks = 0, failures = 0;

  // Mechanism counters, from the decoder's own control signals.
  int n_f = 0, n_g = 0, n_r0 = 0, n_r1 = 0, n_sr = 0, n_stall = 0, n_step1 = 0,
      n_seq = 0, n_flip = 0, n_multichunk = 0;
  int n_fro [4] = '{0, 0, 0, 0};
  always @(posedge clk) if (rst_n) begin
    if (u_dut.wr_en && u_dut.pm_op == PM_F) n_f++;
    if (u_dut.wr_en && u_dut.pm_op == PM_G) n_g++;
    if (u_dut.wr_en && u_dut.wr_chunk != 0) n_multichunk++;
    if (u_dut.est_valid && !u_dut.est_from_sr && u_dut.pm_op == PM_RATE0) n_r0++;
    if (u_dut.est_valid && !u_dut.est_from_sr && u_dut.pm_op == PM_RATE1) n_r1++;
    if (busy && !u_dut.wr_en && !u_dut.est_valid) n_stall++;  // suspended for the SR module
    if (u_dut.est_valid && u_dut.est_from_sr) begin
      logic [2*P-1:0] hd_v;
      n_sr++;
      n_fro[u_dut.instr.fro_num]++;
      if (u_dut.instr.sr_stage != u_dut.instr.src_stage) n_step1++;
      if (u_dut.instr.seq_num != 0) n_seq++;
      for (int i = 0; i < 2*P; i++) hd_v[i] = u_dut.u_sr.src[i].s;
      if (hd_v != u_dut.u_sr.src_bits) n_flip++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_code();
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1; imem_addr = 8'(i); imem_data = prog[i];
    end
    for (int i = 0; i < rs_cnt; i++) begin
      @(negedge clk);
      imem_we = 0;
      rs_we = 1; rs_addr = 3'(i + 1); rs_data = rs_tab[i];
    end
    @(negedge clk);
    imem_we = 0; rs_we = 0;
  endtask

  task automatic run_frame(input real ebn0, input real rate, input bit noiseless);
    bit u [], x [], cw_ref [];
    int llr [], cyc_ref, cyc;
    u = new[N];
    foreach (u[i]) u[i] = frozen[i] ? 1'b0 : 1'($urandom);
    encode(u, x);
    if (noiseless) begin
      llr = new[N];
      foreach (x[i]) llr[i] = x[i] ? -7 : 7;
    end else channel(x, ebn0, rate, llr);
    ref_decode(llr, P, cw_ref, cyc_ref);
    for (int r = 0; r < N / (2 * P); r++) begin
      @(negedge clk);
      ch_we = 1; ch_row = 3'(r);
      for (int i = 0; i < 2 * P; i++) begin
        llr_t q;
        q = to_llr(llr[r * 2 * P + i]);
        ch_llr[i] = {q.s, q.m[QC-2:0]};
      end
    end
    @(negedge clk);
    ch_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    cyc = busy ? 1 : 0;
    while (!done) begin
      @(negedge clk);
      if (busy) cyc++;
    end
    checks++;
    begin
      int errs;
      errs = 0;
      for (int i = 0; i < N; i++) if (codeword[i] != cw_ref[i]) errs++;
      if (errs != 0 || !cw_valid) begin
        failures++;
        $display("codeword differs from the reference in %0d bits (Eb/N0 %0.1f)", errs, ebn0);
      end
    end
    checks++;
    if (cyc != cyc_ref) begin
      failures++;
      $display("cycles %0d, expected %0d", cyc, cyc_ref);
    end
    if (noiseless) begin
      checks++;
      for (int i = 0; i < N; i++)
        if (codeword[i] != x[i]) begin
          failures++;
          $display("noise-free frame not decoded (bit %0d)", i);
          break;
        end
    end
  endtask

  initial begin
    int ks [3] = '{256, 512, 768};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ks[c]) begin
      pw_construct(N, ks[c]);
      compile(N, P);
      $display("P(%0d,%0d): %0d instructions (%0d Rate-0, %0d Rate-1, %0d SR of which %0d with several sequences), %0d node types",
               N, ks[c], prog.size(), cnt_rate0, cnt_rate1, cnt_sr, cnt_sr_seq, rs_cnt);
      load_code();
      run_frame(0.0, real'(ks[c]) / N, 1);
      begin
        int cyc_ref; bit cw []; int l [];
        l = new[N];
        foreach (l[i]) l[i] = 7;
        ref_decode(l, P, cw, cyc_ref);
        $display("P(%0d,%0d): %0d cycles per frame", N, ks[c], cyc_ref);
      end
      for (int f = 0; f < 4; f++) run_frame(1.5 + f * 0.8, real'(ks[c]) / N, 0);
    end
    $display("mechanisms: f=%0d g=%0d multi-chunk=%0d rate0=%0d rate1=%0d sr=%0d stall=%0d step1=%0d seq=%0d flips=%0d fro=%0d/%0d/%0d/%0d",
             n_f, n_g, n_multichunk, n_r0, n_r1, n_sr, n_stall, n_step1, n_seq, n_flip,
             n_fro[0], n_fro[1], n_fro[2], n_fro[3]);
    checks++;
    if (n_f == 0 || n_g == 0 || n_multichunk == 0 || n_r0 == 0 || n_r1 == 0 || n_sr == 0 ||
        n_stall == 0 || n_step1 == 0 || n_seq == 0 || n_flip == 0 ||
        n_fro[0] == 0 || n_fro[1] == 0 || n_fro[2] == 0 || n_fro[3] == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
