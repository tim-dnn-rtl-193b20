// tb_tim_scale_regs: reset to 1, each register written only by its index.
module tb_tim_scale_regs;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] addr = 0; logic [3:0] wdata = 0;
  logic [3:0] w1, w2, i1, i2;
  logic [3:0] r [4];
  tim_scale_regs dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    r = '{1, 1, 1, 1};
    for (int t = 0; t < 100; t++) begin
      we = ($urandom_range(0, 3) != 0); addr = 2'($urandom); wdata = 4'($urandom);
      @(posedge clk); #1;
      if (we) r[addr] = wdata;
      checks++;
      if (w1 !== r[0] || w2 !== r[1] || i1 !== r[2] || i2 !== r[3]) begin
        failures++; $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
