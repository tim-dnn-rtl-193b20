// tb_tim_act_buffer: full-size activation buffer; random writes against a
// reference array, checked through both the half-word tile port and the
// bus port.
module tb_tim_act_buffer;
  localparam int L = 16, E = 16384 * 4 / (2 * L);
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [10:0] waddr = 0, braddr = 0; logic [11:0] raddr = 0;
  logic [2*L-1:0][1:0] wdata = '0, brdata;
  logic [7:0][L-1:0][1:0] rdata;
  logic [63:0] ref_mem [E];
  logic [E-1:0] written = '0;
  tim_act_buffer #(.BYTES(16384), .L(L), .RD_PORTS(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      we = 1; waddr = 11'($urandom_range(0, E - 1)); wdata = {$urandom, $urandom};
      if (t < 4) waddr = (t < 2) ? 11'(t) : 11'(E - 4 + t);
      ref_mem[waddr] = wdata; written[waddr] = 1'b1;
      @(posedge clk); #1;
    end
    we = 0;
    for (int t = 0; t < 3000; t++) begin
      int e;
      e = $urandom_range(0, E - 1);
      if (t < 4) e = (t < 2) ? t : E - 4 + t;
      if (!written[e]) continue;
      raddr = {11'(e), 1'(t)}; braddr = 11'(e); #1;
      checks++;
      if (brdata !== ref_mem[e]) begin failures++; $display("FAIL bus entry %0d", e); end
      for (int p = 0; p < 8; p++) begin
        int h; h = (int'(raddr) + p) % (2 * E);
        if (!written[h / 2]) continue;
        checks++;
        if (rdata[p] !== (h % 2 ? ref_mem[h / 2][63:32] : ref_mem[h / 2][31:0])) begin
          failures++; $display("FAIL port %0d half %0d", p, h);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
