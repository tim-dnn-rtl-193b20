// tb_tim_tpc: exhaustive check of the TPC read path against the ternary
// product W*I: +1 must discharge only BL, -1 only BLB, 0 neither.
module tb_tim_tpc;
  int checks = 0, failures = 0;
  logic a, b, wlr1, wlr2, dis_bl, dis_blb;
  tim_tpc dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int w = -1; w <= 1; w++) for (int i = -1; i <= 1; i++) begin
      int p;
      a = (w != 0); b = (w == -1);        // storage encoding
      wlr1 = (i == 1); wlr2 = (i == -1);  // input encoding
      #1;
      p = w * i;
      checks++;
      if (dis_bl !== (p == 1) || dis_blb !== (p == -1)) begin
        failures++; $display("FAIL w=%0d i=%0d bl=%b blb=%b", w, i, dis_bl, dis_blb);
      end
    end
    // A=0 stores 0 whatever B holds
    a = 0; b = 1; wlr1 = 1; wlr2 = 0; #1; checks++;
    if (dis_bl || dis_blb) failures++;
    a = 0; b = 1; wlr1 = 0; wlr2 = 1; #1; checks++;
    if (dis_bl || dis_blb) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
