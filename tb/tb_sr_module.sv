// tb_sr_module: the SR-node decoder against the integer model of
// Algorithm 1 (Step 1 soft messages, parity check and bit flipping, sequence
// selection by the sum of magnitudes).
//
// The SR nodes are those of the compiled codes P(1024,256/512/768), each fed
// with random LLRs (the unused upper inputs carry random values too). Inputs
// are applied after a clock edge and held; the output is checked after
// exactly SR_LAT = 2 further edges, the latency the controller waits.
module tb_sr_module;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  llr_t in [128];
  seqs_t seqs;
  instr_t instr;
  logic [2:0] cmd1, cmd2, cmd4;
  logic [1:0] cmd3;
  logic [127:0] bits;
  int checks = 0, failures = 0, nodes = 0;
  sr_module u_dut (.clk(clk), .rst_n(rst_n), .in(in), .seqs(seqs), .instr(instr),
                   .cmd1(cmd1), .cmd2(cmd2), .cmd3(cmd3), .cmd4(cmd4), .bits(bits));
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int ks [3] = '{256, 512, 768};
    int a [], j, lim;
    bit est [];
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ks[c]) begin
      pw_construct(1024, ks[c]);
      compile(1024, 64);
      foreach (prog[pi]) begin
        instr_t ins;
        ins = prog[pi];
        if ((ins.fro_num == 0 && ins.seq_num == 0 && ins.sr_stage == ins.src_stage) ||
            (ins.fro_num == 2 && ins.src_stage == 1 && ins.seq_num == 0)) continue;
        for (int rep = 0; rep < 8; rep++) begin
          j = ins.sr_stage;
          lim = (rep < 4) ? 4 : 31;
          a = new[1 << j];
          @(negedge clk);
          for (int i = 0; i < 128; i++) begin
            int x;
            x = $urandom_range(2 * lim) - lim;
            if (i < (1 << j)) a[i] = x;
            in[i] = to_llr(x);
          end
          instr = ins;
          seqs = '0;
          for (int t = 1; t < 8; t++) if (int'(ins.node_type) == t) seqs = rs_tab[t - 1];
          cmd1 = 3'(7 - (ins.sr_stage - ins.src_stage));
          cmd2 = (ins.src_stage <= 4) ? 3'(4 - ins.src_stage) : 3'd0;
          cmd3 = 2'(2 - ins.seq_num);
          cmd4 = (ins.fro_num == 0) ? 3'd7 : 3'(6 - ins.src_stage + ins.fro_num);
          ref_sr(a, ins, seqs, est);
          @(posedge clk);
          @(posedge clk);
          #1;
          nodes++;
          checks++;
          for (int i = 0; i < 128; i++)
            if (bits[i] != ((i < (1 << j)) ? est[i] : 1'b0)) begin
              failures++;
              if (failures < 5) $display("node %0d (j %0d r %0d fro %0d seq %0d): bit %0d differs",
                                          pi, j, ins.src_stage, ins.fro_num, ins.seq_num, i);
              break;
            end
        end
      end
    end
    $display("%0d SR nodes decoded", nodes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
