// tb_tim_psum_buffer: full-size psum buffer; random writes checked through
// all three read ports against a reference array.
module tb_tim_psum_buffer;
  localparam int M = 32, E = 8192 / (2 * M);
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [6:0] waddr = 0, raddr_a = 0, raddr_b = 0, raddr_c = 0;
  logic [M-1:0][11:0] wdata = '0, rdata_a, rdata_b, rdata_c;
  logic [M*12-1:0] ref_mem [E];
  tim_psum_buffer #(.BYTES(8192), .M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < E; e++) begin
      we = 1; waddr = 7'(e);
      for (int p = 0; p < M; p++) wdata[p] = 12'($urandom);
      ref_mem[e] = wdata;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 500; t++) begin
      we = $urandom_range(0, 1); waddr = 7'($urandom);
      for (int p = 0; p < M; p++) wdata[p] = 12'($urandom);
      raddr_a = 7'($urandom); raddr_b = 7'($urandom); raddr_c = 7'($urandom); #1;
      checks++;
      if (rdata_a !== ref_mem[raddr_a] || rdata_b !== ref_mem[raddr_b] || rdata_c !== ref_mem[raddr_c]) begin
        failures++; $display("FAIL t=%0d", t);
      end
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
