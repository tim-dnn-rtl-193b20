// tb_tim_sfu: every SFU operation on random vectors against a reference,
// and the operation latency: 2 cycles for one-pass ops, 3 cycles for tanh
// and sigmoid (32 lanes on 20 SPEs = 2 passes).
module tb_tim_sfu;
  import tim_pkg::*;
  localparam int M = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  op_e op = OP_RELU;
  logic [M-1:0][11:0] a = '0, b = '0, res;
  logic [6:0] thr = 0;
  logic [M-1:0][1:0] q;
  tim_sfu #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  int n_pass2 = 0;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int ref_f(input op_e o, input int x, input int y);
    int v;
    case (o)
      OP_RELU: return x < 0 ? 0 : x;
      OP_MAX:  return x > y ? x : y;
      OP_ADD:  return int'($signed(12'(x + y)));
      OP_TANH: return x > 16 ? 16 : x < -16 ? -16 : x;
      OP_SIGM: begin v = (x >>> 2) + 8; return v > 16 ? 16 : v < 0 ? 0 : v; end
      default: return 0;
    endcase
  endfunction
  initial begin
    op_e ops [6] = '{OP_RELU, OP_MAX, OP_ADD, OP_TANH, OP_SIGM, OP_QUANT};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int lat, explat, sthr;
      logic [M-1:0][11:0] sa, sb;
      op = ops[t % 6];
      for (int p = 0; p < M; p++) begin
        a[p] = 12'($urandom_range(0, 200) - 100);
        b[p] = 12'($urandom_range(0, 200) - 100);
        if (t % 12 == 0) a[p] = 12'($urandom);
      end
      thr = 7'($urandom_range(0, 60));
      sa = a; sb = b; sthr = int'(thr);
      start = 1; @(posedge clk); #1; start = 0;
      // operands may change after start
      a = '0; b = '0;
      lat = 1;
      while (!done) begin @(posedge clk); #1; lat++; if (lat > 10) break; end
      explat = (op == OP_TANH || op == OP_SIGM) ? 3 : 2;
      if (explat == 3) n_pass2++;
      checks++;
      if (lat != explat) begin failures++; $display("FAIL latency op %s %0d", op.name(), lat); end
      for (int p = 0; p < M; p++) begin
        int x, y;
        x = int'($signed(sa[p])); y = int'($signed(sb[p]));
        checks++;
        if (op == OP_QUANT) begin
          logic [1:0] e;
          e = (x > sthr) ? T_POS : (x < -sthr) ? T_NEG : T_ZERO;
          if (q[p] !== e) begin failures++; $display("FAIL quant lane %0d x=%0d thr=%0d", p, x, sthr); end
        end else if (int'($signed(res[p])) != ref_f(op, x, y)) begin
          failures++; $display("FAIL op %s lane %0d x=%0d y=%0d got %0d", op.name(), p, x, y, $signed(res[p]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
