// tb_tim_sample_hold: values are captured only on 'sample' and held after.
module tb_tim_sample_hold;
  localparam int N = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [N-1:0][9:0] v_bl_in, v_blb_in, v_bl, v_blb, ref_bl, ref_blb;
  tim_sample_hold #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    v_bl_in = '0; v_blb_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (v_bl[0] != 10'd1000 || v_blb[N-1] != 10'd1000) failures++;
    for (int t = 0; t < 30; t++) begin
      for (int c = 0; c < N; c++) begin v_bl_in[c] = 10'($urandom); v_blb_in[c] = 10'($urandom); end
      sample = (t % 3 == 0);
      if (sample) begin ref_bl = v_bl_in; ref_blb = v_blb_in; end
      @(posedge clk); #1;
      checks++;
      if (t > 0 || sample) if (v_bl !== ref_bl || v_blb !== ref_blb) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
