// tb_instr_mem: fills the instruction memory with random words and reads
// every address back, then rewrites a few entries and checks that only those
// changed.
module tb_instr_mem;
  import srfsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [7:0] waddr = '0, raddr = '0;
  instr_t wdata = '0, rdata;
  instr_t model [256];
  int checks = 0, failures = 0;
  instr_mem u_dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : main
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = instr_t'($urandom); model[i] = wdata;
    end
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk);
      we = 0;
      for (int i = 0; i < 256; i++) begin
        raddr = 8'(i);
        #1;
        checks++;
        if (rdata !== model[i]) begin
          failures++;
          if (failures < 5) $display("address %0d: %h expected %h", i, rdata, model[i]);
        end
      end
      for (int k = 0; k < 20; k++) begin
        @(negedge clk);
        we = 1; waddr = 8'($urandom); wdata = instr_t'($urandom); model[waddr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
