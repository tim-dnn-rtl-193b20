// tb_tim_col_mux: col_sel g routes columns g*M .. g*M+M-1.
module tb_tim_col_mux;
  localparam int N = 256, M = 32;
  int checks = 0, failures = 0;
  logic [2:0] col_sel;
  logic [N-1:0][9:0] v_bl_in, v_blb_in;
  logic [M-1:0][9:0] v_bl, v_blb;
  tim_col_mux #(.N(N), .M(M)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < N; c++) begin v_bl_in[c] = 10'(c); v_blb_in[c] = 10'(1023 - c); end
    for (int g = 0; g < N / M; g++) begin
      col_sel = 3'(g); #1;
      for (int p = 0; p < M; p++) begin
        checks++;
        if (int'(v_bl[p]) != g * M + p || int'(v_blb[p]) != 1023 - (g * M + p)) begin
          failures++; $display("FAIL g=%0d p=%0d", g, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
