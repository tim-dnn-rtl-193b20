// tb_tim_instr_mem: write all entries, read back with one cycle latency.
module tb_tim_instr_mem;
  import tim_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0; logic [6:0] waddr = 0, raddr = 0;
  logic [INSTR_W-1:0] wdata = '0, rdata;
  logic [INSTR_W-1:0] ref_mem [128];
  tim_instr_mem #(.DEPTH(128)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 128; a++) begin
      we = 1; waddr = 7'(a); wdata = {$urandom, $urandom}; ref_mem[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < 128; a++) begin
      raddr = 7'((a * 37) % 128);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[(a * 37) % 128]) begin failures++; $display("FAIL addr %0d", (a * 37) % 128); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
