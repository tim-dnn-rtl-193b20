// tb_tim_adc: each SPICE state voltage converts to its count, saturating at
// n_max = 8; voltages slightly off a state still convert to it.
module tb_tim_adc;
  int checks = 0, failures = 0;
  logic [9:0] v_mv; logic [3:0] code;
  int st [11] = '{1000, 890, 780, 680, 580, 490, 400, 320, 240, 180, 120};
  tim_adc #(.NMAX(8)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s <= 10; s++) begin
      for (int d = -20; d <= 20; d += 20) begin
        int exp;
        if (s == 0 && d < 0) continue;
        v_mv = 10'(st[s] + ((s == 0) ? 0 : d));
        if (s >= 9 && d != 0) continue;
        #1;
        exp = (s > 8) ? 8 : s;
        checks++;
        if (int'(code) != exp) begin failures++; $display("FAIL s=%0d v=%0d code=%0d", s, v_mv, code); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
