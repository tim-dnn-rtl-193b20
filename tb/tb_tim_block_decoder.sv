// tb_tim_block_decoder: one-hot block enable per address, none without readEN.
module tb_tim_block_decoder;
  localparam int K = 16;
  int checks = 0, failures = 0;
  logic read_en; logic [3:0] blk_addr; logic [K-1:0] ben;
  tim_block_decoder #(.K(K)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < K; k++) begin
      read_en = 1; blk_addr = 4'(k); #1; checks++;
      if (ben !== (16'h1 << k)) begin failures++; $display("FAIL blk %0d ben=%h", k, ben); end
      read_en = 0; #1; checks++;
      if (ben !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
