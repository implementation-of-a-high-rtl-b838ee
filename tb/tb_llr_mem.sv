// tb_llr_mem: loads random channel LLRs and writes random LLRs into every
// chunk of every internal level, then reads every chunk of every level back
// (2P at a time) and compares with a per-level model, which also shows that
// the levels do not overlap. Channel LLRs must come back widened to 6 bits.
module tb_llr_mem;
  import srfsc_pkg::*;
  import srfsc_ref_pkg::*;
  localparam int N = 1024, P = 64, LN = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ch_we = 0, wr_en = 0;
  logic [2:0] ch_row = '0;
  logic [3:0] rd_chunk = '0, wr_chunk = '0;
  logic [2*P-1:0][QC-1:0] ch_llr = '0;
  logic [3:0] rd_level = '0, wr_level = '0;
  llr_t rd_data [2*P], wr_data [P];
  int model [LN+1][N];
  int checks = 0, failures = 0;
  llr_mem u_dut (.clk(clk), .ch_we(ch_we), .ch_row(ch_row), .ch_llr(ch_llr),
                 .rd_level(rd_level), .rd_chunk(rd_chunk), .rd_data(rd_data),
                 .wr_en(wr_en), .wr_level(wr_level), .wr_chunk(wr_chunk), .wr_data(wr_data));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    int x, nw, nr, len;
    for (int r = 0; r < N / (2 * P); r++) begin
      @(negedge clk);
      ch_we = 1; ch_row = 3'(r);
      for (int i = 0; i < 2 * P; i++) begin
        x = $urandom_range(14) - 7;
        model[LN][r * 2 * P + i] = x;
        ch_llr[i] = {x < 0, 3'(iabs(x))};
      end
    end
    @(negedge clk);
    ch_we = 0;
    for (int j = 0; j < LN; j++) begin
      nw = ((1 << j) > P) ? (1 << j) / P : 1;
      for (int c = 0; c < nw; c++) begin
        @(negedge clk);
        wr_en = 1; wr_level = 4'(j); wr_chunk = 4'(c);
        for (int i = 0; i < P; i++) begin
          x = $urandom_range(62) - 31;
          wr_data[i] = to_llr(x);
          if (c * P + i < (1 << j)) model[j][c * P + i] = x;
        end
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int j = 0; j <= LN; j++) begin
      len = (1 << j);
      nr = (len > 2 * P) ? len / (2 * P) : 1;
      for (int c = 0; c < nr; c++) begin
        rd_level = 4'(j); rd_chunk = 4'(c);
        #1;
        for (int i = 0; i < 2 * P; i++)
          if (c * 2 * P + i < len) begin
            checks++;
            if ((rd_data[i].s ? -int'(rd_data[i].m) : int'(rd_data[i].m)) != model[j][c * 2 * P + i]) begin
              failures++;
              if (failures < 5) $display("level %0d chunk %0d entry %0d wrong", j, c, i);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
