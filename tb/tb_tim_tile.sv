// tb_tim_tile: full-size TiM tile. Writes random ternary weights into every
// row, then runs back-to-back vector-matrix accesses on random blocks with
// random sparse ternary inputs, scale factors, I_alpha step, input bit
// significance and psum-in, and compares every column's partial sum with a
// reference computed here from the weights:
//   n = #(+1 products), k = #(-1 products), each clipped at n_max = 8,
//   out = ((W1*n - W2*k) * I_alpha << isb) + psum_in   (12-bit wrap).
// It also checks the pipeline timing: group g of an access accepted in
// cycle t appears in cycle t+1+g, and accesses are accepted every N/M = 8
// cycles when issued back to back.
module tb_tim_tile;
  import tim_pkg::*;
  localparam int L = 16, K = 16, N = 256, M = 32, G = N / M;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [7:0] wr_row = 0; logic [N-1:0][1:0] wr_data = '0;
  logic sf_we = 0; logic [1:0] sf_addr = 0; logic [3:0] sf_wdata = 0;
  logic rd_en = 0, rd_ready; logic [3:0] blk_addr = 0; logic [L-1:0][1:0] inp = '0;
  logic [1:0] isb = 0; logic alpha_sel = 0;
  logic [M-1:0][11:0] psum_in, psum_out;
  logic out_valid; logic [2:0] out_group;

  tim_tile #(.L(L), .K(K), .N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;

  int W [L*K][N];
  int sf [4];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // psum-in is a function of the group so the reference can recompute it
  int salt = 0;
  always_comb for (int p = 0; p < M; p++) psum_in[p] = 12'(salt * 7 + int'(out_group) * 33 + p * 5);

  // expected results of the access in flight
  int exp_q [$];
  int acc_cyc [$];
  int n_access = 0, n_groups = 0, n_sat = 0;

  function automatic void push_expected(input int b, input logic [L-1:0][1:0] x, input int ia, input int sh, input int s);
    for (int g = 0; g < G; g++) for (int p = 0; p < M; p++) begin
      int c, nn, kk, v;
      c = g * M + p; nn = 0; kk = 0;
      for (int r = 0; r < L; r++) begin
        int pr;
        pr = W[b * L + r][c] * tern_val(x[r]);
        if (pr == 1) nn++;
        if (pr == -1) kk++;
      end
      if (nn > 8 || kk > 8) n_sat++;
      nn = nn > 8 ? 8 : nn; kk = kk > 8 ? 8 : kk;
      v = (((sf[0] * nn - sf[1] * kk) * ia) <<< sh) + (s * 7 + g * 33 + p * 5);
      exp_q.push_back(v);
    end
  endfunction

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output monitor
  int last_acc = -100;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_group == 0) begin
      checks++;
      if (acc_cyc.size() == 0 || cyc != acc_cyc[0] + 1) begin
        failures++; $display("FAIL latency: group 0 at %0d", cyc);
      end
      if (acc_cyc.size() != 0) void'(acc_cyc.pop_front());
    end
    for (int p = 0; p < M; p++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (psum_out[p] !== 12'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL grp %0d pcu %0d got %0d exp %0d", out_group, p, $signed(psum_out[p]), 12'(e));
      end
    end
    n_groups++;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // load weights row by row (about 40% zeros)
    for (int r = 0; r < L * K; r++) begin
      wr_en = 1; wr_row = 8'(r);
      for (int c = 0; c < N; c++) begin
        int u; u = $urandom_range(0, 9);
        W[r][c] = (u < 4) ? 0 : (u < 7) ? 1 : -1;
        wr_data[c] = (W[r][c] == 1) ? T_POS : (W[r][c] == -1) ? T_NEG : T_ZERO;
      end
      @(posedge clk); #1;
    end
    wr_en = 0;
    sf = '{1, 1, 1, 1};
    for (int it = 0; it < 40; it++) begin
      int ia, dense;
      // new scale factors every 10 accesses, written while idle
      if (it % 10 == 0 && it > 0) begin
        while (out_valid) begin @(posedge clk); #1; end
        for (int a = 0; a < 4; a++) begin
          sf_we = 1; sf_addr = 2'(a); sf_wdata = 4'($urandom_range(1, 15)); sf[a] = int'(sf_wdata);
          @(posedge clk); #1;
        end
        sf_we = 0;
      end
      while (!rd_ready) begin @(posedge clk); #1; end
      blk_addr = 4'($urandom); alpha_sel = 1'($urandom); isb = 2'($urandom);
      dense = (it % 5 == 4);
      for (int r = 0; r < L; r++) begin
        int u; u = $urandom_range(0, 9);
        inp[r] = (!dense && u < 4) ? T_ZERO : (u % 2 == 0) ? T_POS : T_NEG;
      end
      ia = alpha_sel ? -sf[3] : sf[2];
      rd_en = 1;
      push_expected(int'(blk_addr), inp, ia, int'(isb), salt + 1);
      acc_cyc.push_back(cyc);
      // accesses issued back to back must be accepted every G cycles
      if (last_acc >= 0 && it % 10 != 0) begin
        checks++;
        if (cyc - last_acc != G) begin failures++; $display("FAIL interval %0d", cyc - last_acc); end
      end
      last_acc = cyc;
      @(posedge clk); #1;
      salt = salt + 1;   // psum_in of this access uses the new salt from here on
      rd_en = 0;
      n_access++;
    end
    while (out_valid) begin @(posedge clk); #1; end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_groups != 40 * G) begin failures++; $display("FAIL missing outputs"); end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL no saturated column seen"); end
    $display("accesses=%0d groups=%0d saturated columns=%0d", n_access, n_groups, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
