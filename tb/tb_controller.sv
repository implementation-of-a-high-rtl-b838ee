// tb_controller: runs the controller on the instruction lists of the three
// compiled codes, with a testbench instruction memory. Checked against a
// schedule model: the busy time, the number of f and g cycles, the position
// and source (processing module or SR module) of every leaf estimate, the
// Cmd1..Cmd4 values of every SR node, the SR wait, and the done pulse.
module tb_controller;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  localparam int N = 1024, P = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, wr_en, psn_clear, est_valid, est_from_sr;
  logic [7:0] pc;
  instr_t instr;
  logic [3:0] rd_level, wr_level, ps_level, rd_chunk, wr_chunk, ps_chunk;
  pm_op_e pm_op;
  logic [2:0] est_stage, cmd1, cmd2, cmd4;
  logic [9:0] est_idx;
  logic [1:0] cmd3;
  int checks = 0, failures = 0;
  controller u_dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .pc(pc), .instr(instr), .rd_level(rd_level), .rd_chunk(rd_chunk), .wr_en(wr_en),
    .wr_level(wr_level), .wr_chunk(wr_chunk), .pm_op(pm_op), .psn_clear(psn_clear),
    .est_valid(est_valid), .est_from_sr(est_from_sr), .est_stage(est_stage), .est_idx(est_idx),
    .ps_level(ps_level), .ps_chunk(ps_chunk), .cmd1(cmd1), .cmd2(cmd2), .cmd3(cmd3), .cmd4(cmd4));
  assign instr = (int'(pc) < prog.size()) ? prog[pc] : '0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int ks [3] = '{256, 512, 768};
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ks[c]) begin
      pw_construct(N, ks[c]);
      compile(N, P);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        @(posedge clk);
        #1;
      end
      // let the totals block see the done pulse before the next code is loaded
      @(posedge clk);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Per-cycle checks, sampled just before each rising edge.
  int c_f, c_g, c_leaf, c_b, c_cyc, c_wait;
  initial begin
    c_f = 0; c_g = 0; c_leaf = 0; c_b = 0; c_cyc = 0; c_wait = 0;
  end
  always @(negedge clk) if (rst_n) begin
    if (psn_clear) begin
      c_f = 0; c_g = 0; c_leaf = 0; c_b = 0; c_cyc = 0; c_wait = 0;
    end
    if (busy) c_cyc++;
    if (wr_en && pm_op == PM_F) c_f++;
    if (wr_en && pm_op == PM_G) c_g++;
    if (busy && !wr_en && !est_valid) c_wait++;
    if (est_valid) begin
      instr_t ins;
      bit byp;
      ins = prog[c_leaf];
      byp = (ins.fro_num == 0 && ins.seq_num == 0 && ins.sr_stage == ins.src_stage) ||
            (ins.fro_num == 2 && ins.src_stage == 1 && ins.seq_num == 0);
      checks++;
      if (int'(est_idx) != c_b || est_stage != ins.sr_stage || est_from_sr == byp ||
          int'(rd_level) != int'(ins.sr_stage) || rd_chunk != 0) begin
        failures++;
        if (failures < 5) $display("leaf %0d: idx %0d (exp %0d) from_sr %0d", c_leaf, est_idx, c_b, est_from_sr);
      end
      if (!byp) begin
        checks++;
        if (int'(cmd1) != 7 - (ins.sr_stage - ins.src_stage) ||
            int'(cmd3) != 2 - ins.seq_num ||
            (ins.src_stage <= 4 && int'(cmd2) != 4 - ins.src_stage) ||
            int'(cmd4) != ((ins.fro_num == 0) ? 7 : 6 - ins.src_stage + ins.fro_num)) begin
          failures++;
          if (failures < 5) $display("leaf %0d: command values wrong", c_leaf);
        end
      end
      c_b += 1 << ins.sr_stage;
      c_leaf++;
    end
  end

  // At each done pulse: totals against the schedule model.
  always @(posedge clk) if (rst_n && done) begin : totals
    int exp_cyc, exp_f, exp_g, exp_wait, cur, b, gl;
    bit d [];
    int ch [];
    ch = new[N];
    foreach (ch[i]) ch[i] = 7;
    ref_decode(ch, P, d, exp_cyc);
    exp_f = 0; exp_g = 0; exp_wait = 0; cur = 10; b = 0;
    foreach (prog[pi]) begin
      while (cur > prog[pi].sr_stage) begin
        exp_f += ((1 << cur) > 2 * P) ? (1 << cur) / (2 * P) : 1;
        cur--;
      end
      if (!((prog[pi].fro_num == 0 && prog[pi].seq_num == 0 && prog[pi].sr_stage == prog[pi].src_stage) ||
            (prog[pi].fro_num == 2 && prog[pi].src_stage == 1 && prog[pi].seq_num == 0)))
        exp_wait += SR_LAT;
      b += 1 << prog[pi].sr_stage;
      if (b < N) begin
        gl = 1;
        while (((b >> (gl - 1)) & 1) == 0) gl++;
        exp_g += ((1 << gl) > 2 * P) ? (1 << gl) / (2 * P) : 1;
        cur = gl - 1;
      end
    end
    checks++;
    if (c_cyc != exp_cyc || c_f != exp_f || c_g != exp_g || c_leaf != prog.size() ||
        c_b != N || c_wait != exp_wait) begin
      failures++;
      $display("totals: cycles %0d/%0d f %0d/%0d g %0d/%0d leaves %0d/%0d waits %0d/%0d",
               c_cyc, exp_cyc, c_f, exp_f, c_g, exp_g, c_leaf, prog.size(), c_wait, exp_wait);
    end
    $display("frame: %0d cycles, %0d f, %0d g, %0d leaves", c_cyc, c_f, c_g, c_leaf);
  end
endmodule
