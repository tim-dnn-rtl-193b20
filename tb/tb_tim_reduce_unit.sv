// tb_tim_reduce_unit: lane-wise sum over the masked tiles, 12-bit wrap.
module tb_tim_reduce_unit;
  localparam int T = 8, M = 32;
  int checks = 0, failures = 0;
  logic [T-1:0] mask; logic [T-1:0][M-1:0][11:0] in; logic [M-1:0][11:0] out;
  tim_reduce_unit #(.TILES(T), .M(M)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      mask = 8'($urandom);
      if (t == 0) mask = '1;
      for (int i = 0; i < T; i++) for (int p = 0; p < M; p++) in[i][p] = 12'($urandom);
      #1;
      for (int p = 0; p < M; p++) begin
        int s; s = 0;
        for (int i = 0; i < T; i++) if (mask[i]) s += int'($signed(in[i][p]));
        checks++;
        if (out[p] !== 12'(s)) begin failures++; $display("FAIL t=%0d lane %0d", t, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
