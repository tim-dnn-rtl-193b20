// tb_tim_row_decoder: every address gives exactly its own wordline; none
// without writeEN.
module tb_tim_row_decoder;
  localparam int ROWS = 256;
  int checks = 0, failures = 0;
  logic write_en; logic [7:0] row_addr; logic [ROWS-1:0] wl_w;
  tim_row_decoder #(.ROWS(ROWS)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < ROWS; r++) begin
      logic [ROWS-1:0] exp;
      exp = '0; exp[r] = 1'b1;
      write_en = 1; row_addr = 8'(r); #1; checks++;
      if (wl_w !== exp) begin failures++; $display("FAIL row %0d", r); end
      write_en = 0; #1; checks++;
      if (wl_w !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
