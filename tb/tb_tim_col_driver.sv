// tb_tim_col_driver: ternary words must be encoded as the TPC storage bits
// 0 -> A=0, +1 -> A=1 B=0, -1 -> A=1 B=1.
module tb_tim_col_driver;
  localparam int N = 256;
  int checks = 0, failures = 0;
  logic write_en; logic [N-1:0][1:0] tw; logic [N-1:0] a, b; logic drive;
  tim_col_driver #(.N(N)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 20; t++) begin
      write_en = t[0];
      for (int c = 0; c < N; c++) tw[c] = 2'($urandom_range(0, 2));
      #1;
      checks++;
      if (drive !== write_en) failures++;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (a[c] !== (tw[c] != 2'b00) || b[c] !== (tw[c] == 2'b10)) begin
          failures++; $display("FAIL c=%0d tw=%b a=%b b=%b", c, tw[c], a[c], b[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
