// tb_tim_bitline: the voltage depends only on how many cells discharge the
// line and follows the SPICE state table, saturating beyond 10 cells.
module tb_tim_bitline;
  localparam int L = 16;
  int checks = 0, failures = 0;
  logic [L-1:0] dis; logic [9:0] v_mv;
  int exp_mv [11] = '{1000, 890, 780, 680, 580, 490, 400, 320, 240, 180, 120};
  tim_bitline #(.L(L)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      int cnt;
      dis = L'($urandom);
      if (t < 17) dis = L'((32'h1 << t) - 1);  // 0..16 cells
      #1;
      cnt = $countones(dis);
      checks++;
      if (int'(v_mv) != exp_mv[cnt > 10 ? 10 : cnt]) begin
        failures++; $display("FAIL cnt=%0d v=%0d", cnt, v_mv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
