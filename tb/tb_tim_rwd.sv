// tb_tim_rwd: random ternary vectors; WL_R1 must follow +1, WL_R2 -1, and
// nothing may be driven without the block enable.
module tb_tim_rwd;
  localparam int L = 16;
  int checks = 0, failures = 0;
  logic ben; logic [L-1:0][1:0] inp; logic [L-1:0] wlr1, wlr2;
  tim_rwd #(.L(L)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      ben = (t % 4) != 3;
      for (int i = 0; i < L; i++) inp[i] = 2'($urandom_range(0, 3));
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (wlr1[i] !== (ben && inp[i] == 2'b01) || wlr2[i] !== (ben && inp[i] == 2'b10)) begin
          failures++; $display("FAIL t=%0d i=%0d", t, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
