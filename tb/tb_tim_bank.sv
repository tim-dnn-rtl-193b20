// tb_tim_bank: one bank at its default size (8 tiles of 256 x 256 cells)
// running two small layers through its own program:
//  * Layer A, asymmetric weighted ternary system {-W2, 0, W1} x {-I2, 0, I1}
//    (as used by the recurrent benchmarks): a 128-element input vector
//    spread over 4 tiles x 2 blocks, each block evaluated in two steps
//    (I_alpha = I1, then -I2), all accumulated in the PCUs and reduced by
//    the RU into 256 outputs (psum entries 0..7).
//  * Layer B, ternary weights with 2-bit activations (as used by the
//    convolutional benchmarks): 2 tiles x 2 blocks, evaluated bit-serially
//    with the input-bit shift (psum entries 32..39).
//  * SFU: ReLU, max-pool, add, tanh, sigmoid and quantisation to ternary
//    activations written back to the activation buffer.
// Weights and inputs are random (about 40% zeros). The reference is
// computed here directly from the weights and inputs, including the
// clipping of each bitline count at n_max = 8. Also counts the scheduler
// stalls, accumulations, steps, shifts and SFU operations: each must occur.
module tb_tim_bank;
  import tim_pkg::*;
  localparam int TILES = 8, L = 16, K = 16, N = 256, M = 32, G = N / M;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic im_we = 0; logic [6:0] im_waddr = 0; logic [INSTR_W-1:0] im_wdata = '0;
  logic act_we = 0; logic [10:0] act_waddr = 0, act_raddr = 0; logic [2*L-1:0][1:0] act_wdata = '0, act_rdata;
  logic wt_we = 0; logic [2:0] wt_tile = 0; logic [7:0] wt_row = 0; logic [N-1:0][1:0] wt_data = '0;
  logic [6:0] ps_raddr = 0; logic [M-1:0][11:0] ps_rdata;
  logic start = 0, busy, done, stall;

  tim_bank #(.TILES(TILES)) dut (.*);
  always #5 clk = ~clk;

  int W [TILES][L*K][N];     // ternary weights -1/0/1
  int X [4096][L];           // ternary values per activation half-word
  int nprog = 0;

  task automatic put(input instr_t i);
    im_we = 1; im_waddr = 7'(nprog); im_wdata = i; @(posedge clk); #1; im_we = 0; nprog++;
  endtask

  function automatic instr_t mk(op_e op, int tm, int blk, int isb, int alpha, int acc, int aaddr, int paddr, int paddr2);
    instr_t i;
    i = '0; i.op = op; i.tmask = 8'(tm); i.blk = 4'(blk); i.isb = 2'(isb); i.alpha = 1'(alpha);
    i.acc = 1'(acc); i.aaddr = 12'(aaddr); i.paddr = 7'(paddr); i.paddr2 = 7'(paddr2);
    return i;
  endfunction

  // write one activation entry (two half-words) from X
  task automatic put_act(input int entry);
    act_we = 1; act_waddr = 11'(entry);
    for (int j = 0; j < 2 * L; j++) begin
      int v; v = X[2 * entry + j / L][j % L];
      act_wdata[j] = (v == 1) ? T_POS : (v == -1) ? T_NEG : T_ZERO;
    end
    @(posedge clk); #1; act_we = 0;
  endtask

  // clipped counts of one tile/block/column for the input half-word h
  function automatic void counts(input int t, input int b, input int c, input int h, output int n, output int k);
    n = 0; k = 0;
    for (int r = 0; r < L; r++) begin
      int p; p = W[t][b * L + r][c] * X[h][r];
      if (p == 1) n++;
      if (p == -1) k++;
    end
    if (n > 8) n = 8;
    if (k > 8) k = 8;
  endfunction

  int ref_a [N], ref_b [N];
  int cyc = 0, n_stall = 0, n_acc = 0, n_alpha = 0, n_shift = 0, n_sfu = 0, n_quant = 0, n_sat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall) n_stall++;
    if (|dut.tile_rd_en && dut.u_sched.ins.acc) n_acc++;
    if (|dut.tile_rd_en && dut.tile_alpha) n_alpha++;
    if (|dut.tile_rd_en && dut.tile_isb != 0) n_shift++;
    if (dut.sfu_start) n_sfu++;
    if (dut.sched_act_we) n_quant++;
  end

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1, w2, i1, i2, t0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // ---- weights: tiles 0..3 blocks 0..1 ----
    for (int t = 0; t < 4; t++) for (int r = 0; r < 2 * L; r++) begin
      wt_we = 1; wt_tile = 3'(t); wt_row = 8'(r);
      for (int c = 0; c < N; c++) begin
        int u; u = $urandom_range(0, 9);
        W[t][r][c] = (u < 4) ? 0 : (u < 7) ? 1 : -1;
        wt_data[c] = (W[t][r][c] == 1) ? T_POS : (W[t][r][c] == -1) ? T_NEG : T_ZERO;
      end
      @(posedge clk); #1;
    end
    wt_we = 0;
    // ---- layer A inputs: logical ternary x (4 tiles x 2 blocks x 16) ----
    // half-word layout: step s, block b, tile t -> h = 16*b + 8*s + t (tiles 0..3)
    begin
      int xa [4][2][L];
      for (int t = 0; t < 4; t++) for (int b = 0; b < 2; b++) for (int r = 0; r < L; r++) begin
        int u; u = $urandom_range(0, 9);
        xa[t][b][r] = (u < 4) ? 0 : (u < 7) ? 1 : -1;
      end
      for (int b = 0; b < 2; b++) for (int s = 0; s < 2; s++) for (int t = 0; t < 8; t++)
        for (int r = 0; r < L; r++)
          X[16 * b + 8 * s + t][r] = (t < 4) ? ((s == 0) ? int'(xa[t][b][r] == 1) : int'(xa[t][b][r] == -1)) : 0;
      for (int e = 0; e < 16; e++) put_act(e);
    end
    w1 = 3; w2 = 2; i1 = 2; i2 = 1;
    for (int c = 0; c < N; c++) begin
      int v; v = 0;
      for (int t = 0; t < 4; t++) for (int b = 0; b < 2; b++) begin
        int n, k;
        counts(t, b, c, 16 * b + t, n, k);     v += i1 * (w1 * n - w2 * k);
        counts(t, b, c, 16 * b + 8 + t, n, k); v += -i2 * (w1 * n - w2 * k);
      end
      ref_a[c] = v;
    end
    // ---- layer B inputs: 2-bit activations on tiles 0..1 as bit planes ----
    // half-word h = 64 + 8*b + 4*bit + t
    begin
      int act [2][2][L];
      for (int t = 0; t < 2; t++) for (int b = 0; b < 2; b++) for (int r = 0; r < L; r++) act[t][b][r] = $urandom_range(0, 3);
      for (int b = 0; b < 2; b++) for (int bit_ = 0; bit_ < 2; bit_++) for (int t = 0; t < 4; t++)
        for (int r = 0; r < L; r++) X[64 + 8 * b + 4 * bit_ + t][r] = (t < 2) ? ((act[t][b][r] >> bit_) & 1) : 0;
      for (int e = 32; e < 40; e++) put_act(e);
      for (int c = 0; c < N; c++) begin
        int v; v = 0;
        for (int t = 0; t < 2; t++) for (int b = 0; b < 2; b++) for (int bit_ = 0; bit_ < 2; bit_++) begin
          int n, k;
          counts(t, b, c, 64 + 8 * b + 4 * bit_ + t, n, k);
          v += (n - k) << bit_;
        end
        ref_b[c] = v;
      end
    end
    // ---- program ----
    put(mk(OP_SETSF, 8'h0F, w1, 0, 0, 0, 0, 0, 0));
    put(mk(OP_SETSF, 8'h0F, w2, 1, 0, 0, 0, 0, 0));
    put(mk(OP_SETSF, 8'h0F, i1, 2, 0, 0, 0, 0, 0));
    put(mk(OP_SETSF, 8'h0F, i2, 3, 0, 0, 0, 0, 0));
    for (int b = 0; b < 2; b++) for (int s = 0; s < 2; s++)
      put(mk(OP_COMPUTE, 8'h0F, b, 0, s, (b + s) != 0, 16 * b + 8 * s, 0, 0));
    for (int a = 0; a < 4; a++) put(mk(OP_SETSF, 8'h0F, 1, a, 0, 0, 0, 0, 0));
    for (int b = 0; b < 2; b++) for (int bit_ = 0; bit_ < 2; bit_++)
      put(mk(OP_COMPUTE, 8'h03, b, bit_, 0, (b + bit_) != 0, 64 + 8 * b + 4 * bit_, 32, 0));
    put(mk(OP_RELU,  0, 0, 0, 0, 0, 0, 0, 64));     // psum[64] = relu(A entry 0)
    put(mk(OP_TANH,  0, 0, 0, 0, 0, 0, 1, 65));     // psum[65] = tanh(A entry 1)
    put(mk(OP_SIGM,  0, 0, 0, 0, 0, 0, 2, 66));     // psum[66] = sigm(A entry 2)
    put(mk(OP_MAX,   0, 0, 0, 0, 0, 0, 32, 33));    // psum[33] = max(B0, B1)
    put(mk(OP_ADD,   0, 0, 0, 0, 0, 0, 34, 35));    // psum[35] = B2 + B3
    put(mk(OP_QUANT, 0, 0, 0, 0, 0, 1000, 3, 6));   // act[1000] = quant(A entry 3, thr 6)
    put(mk(OP_HALT,  0, 0, 0, 0, 0, 0, 0, 0));
    // ---- run ----
    t0 = cyc;
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    $display("program ran %0d cycles", cyc - t0);
    // ---- check ----
    for (int e = 0; e < G; e++) begin
      ps_raddr = 7'(e); #1;
      for (int p = 0; p < M; p++) begin
        checks++;
        if (ps_rdata[p] !== 12'(ref_a[e * M + p])) begin
          failures++; if (failures < 10) $display("FAIL A col %0d got %0d exp %0d", e * M + p, $signed(ps_rdata[p]), ref_a[e * M + p]);
        end
      end
      ps_raddr = 7'(32 + e); #1;
      for (int p = 0; p < M; p++) begin
        int exp;
        exp = ref_b[e * M + p];
        if (e == 1) exp = ref_b[M + p] > ref_b[p] ? ref_b[M + p] : ref_b[p];
        if (e == 3) exp = ref_b[2 * M + p] + ref_b[3 * M + p];
        checks++;
        if (ps_rdata[p] !== 12'(exp)) begin
          failures++; if (failures < 10) $display("FAIL B entry %0d lane %0d got %0d exp %0d", e, p, $signed(ps_rdata[p]), exp);
        end
      end
    end
    for (int p = 0; p < M; p++) begin
      int x, e;
      ps_raddr = 7'(64); #1; x = ref_a[p];
      checks++; if ($signed(ps_rdata[p]) != (x < 0 ? 0 : x)) begin failures++; $display("FAIL relu %0d", p); end
      ps_raddr = 7'(65); #1; x = ref_a[M + p]; e = x > 16 ? 16 : x < -16 ? -16 : x;
      checks++; if ($signed(ps_rdata[p]) != e) begin failures++; $display("FAIL tanh %0d", p); end
      ps_raddr = 7'(66); #1; x = ref_a[2 * M + p]; e = (x >>> 2) + 8; e = e > 16 ? 16 : e < 0 ? 0 : e;
      checks++; if ($signed(ps_rdata[p]) != e) begin failures++; $display("FAIL sigm %0d", p); end
      act_raddr = 11'(1000); #1; x = ref_a[3 * M + p];
      checks++;
      if (act_rdata[p] !== ((x > 6) ? T_POS : (x < -6) ? T_NEG : T_ZERO)) begin failures++; $display("FAIL quant %0d", p); end
    end
    // mechanisms
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_acc == 0)   begin failures++; $display("FAIL no accumulate"); end
    checks++; if (n_alpha == 0) begin failures++; $display("FAIL no second step"); end
    checks++; if (n_shift == 0) begin failures++; $display("FAIL no input-bit shift"); end
    checks++; if (n_sfu != 6)   begin failures++; $display("FAIL sfu ops %0d", n_sfu); end
    checks++; if (n_quant != 1) begin failures++; $display("FAIL quant writes"); end
    $display("stalls=%0d accumulating accesses=%0d second steps=%0d shifted=%0d sfu ops=%0d",
             n_stall, n_acc, n_alpha, n_shift, n_sfu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
