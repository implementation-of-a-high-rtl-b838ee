// tb_repseq_mem: writes random sequence sets to NodeTypes 1..7 (and tries to
// write NodeType 0), then checks every read: NodeType 0 must read all zero.
module tb_repseq_mem;
  import srfsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [2:0] waddr = '0, raddr = '0;
  seqs_t wdata = '0, rdata;
  seqs_t model [8];
  int checks = 0, failures = 0;
  repseq_mem u_dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    model[0] = '0;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 8; i++) begin
        @(negedge clk);
        we = 1; waddr = 3'(i);
        for (int l = 0; l < 4; l++) wdata[l] = {$urandom, $urandom};
        if (i != 0) model[i] = wdata;
      end
      @(negedge clk);
      we = 0;
      for (int i = 0; i < 8; i++) begin
        raddr = 3'(i);
        #1;
        checks++;
        if (rdata !== model[i]) begin
          failures++;
          if (failures < 5) $display("NodeType %0d reads wrong", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
