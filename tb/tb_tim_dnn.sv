// tb_tim_dnn: end-to-end test of the accelerator top, built with 2 banks
// of 4 tiles; the tiles keep their full 256 x 256 size. The default
// instance (4 banks x 8 tiles) takes far longer to compile with Verilator
// than a regression run allows. The mechanisms tested are the same at both
// sizes: the banks are identical and independent, and the tile count only
// sets how many partial sums the reduce unit adds.
// All banks are loaded over their bus ports and then run their own
// program at the same time, each with its own random weights, inputs and
// scale factors. Every program runs:
//  * an asymmetric weighted ternary layer ({-W2, 0, W1} weights,
//    {-I2, 0, I1} inputs, the form the recurrent benchmarks use): a
//    16*TILES-element input over all tiles x 2 blocks, each block in two
//    steps (I1 then -I2), accumulated in the PCUs, reduced across the tiles
//    by the RU into 256 outputs (psum entries 0..7);
//  * a mode switch (new scale factors) to unweighted ternary weights with
//    2-bit activations (the convolutional form), evaluated bit-serially
//    over 4 tiles x 2 blocks into psum entries 32..39;
//  * ReLU, max-pool, add, tanh, sigmoid and quantisation of psum results
//    into ternary activations written to the activation buffer, then a
//    second layer that reads the quantised activations back (psum 48).
// The reference is computed here from the weights and inputs, with each
// bitline count clipped at n_max = 8. The test also counts the mechanisms
// it exercises (stalls, accumulation, second steps, input-bit shifts,
// reduction over several tiles, 2-pass SFU operations, quantise-and-reuse,
// banks running together, mode switches); a count of zero is a failure.
module tb_tim_dnn;
  import tim_pkg::*;
  localparam int B = 2, TILES = 4, L = 16, K = 16, N = 256, M = 32, G = N / M;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [B-1:0] im_we = '0, act_we = '0, wt_we = '0, start = '0, busy, done, stall;
  logic [B-1:0][6:0] im_waddr = '0, ps_raddr = '0;
  logic [B-1:0][INSTR_W-1:0] im_wdata = '0;
  logic [B-1:0][10:0] act_waddr = '0, act_raddr = '0;
  logic [B-1:0][2*L-1:0][1:0] act_wdata = '0, act_rdata;
  logic [B-1:0][$clog2(TILES)-1:0] wt_tile = '0;
  logic [B-1:0][7:0] wt_row = '0;
  logic [B-1:0][N-1:0][1:0] wt_data = '0;
  logic [B-1:0][M-1:0][11:0] ps_rdata;

  tim_dnn #(.NUM_BANKS(B), .TILES(TILES)) dut (.*);
  always #5 clk = ~clk;

  int W [B][TILES][L*K][N];
  int X [B][4096][L];
  int nprog [B];

  function automatic logic [1:0] enc(int v);
    return (v == 1) ? T_POS : (v == -1) ? T_NEG : T_ZERO;
  endfunction

  function automatic int tern(int u);   // about 40% zeros
    return (u < 4) ? 0 : (u < 7) ? 1 : -1;
  endfunction

  task automatic put(input int b, input instr_t i);
    im_we[b] = 1; im_waddr[b] = 7'(nprog[b]); im_wdata[b] = i; @(posedge clk); #1; im_we[b] = 0; nprog[b]++;
  endtask

  function automatic instr_t mk(op_e op, int tm, int blk, int isb, int alpha, int acc, int aaddr, int paddr, int paddr2);
    instr_t i;
    i = '0; i.op = op; i.tmask = 8'(tm); i.blk = 4'(blk); i.isb = 2'(isb); i.alpha = 1'(alpha);
    i.acc = 1'(acc); i.aaddr = 12'(aaddr); i.paddr = 7'(paddr); i.paddr2 = 7'(paddr2);
    return i;
  endfunction

  task automatic put_act(input int b, input int entry);
    act_we[b] = 1; act_waddr[b] = 11'(entry);
    for (int j = 0; j < 2 * L; j++) act_wdata[b][j] = enc(X[b][2 * entry + j / L][j % L]);
    @(posedge clk); #1; act_we[b] = 0;
  endtask

  function automatic void counts(input int b, input int t, input int blk, input int c, input int h,
                                 output int n, output int k);
    n = 0; k = 0;
    for (int r = 0; r < L; r++) begin
      int p; p = W[b][t][blk * L + r][c] * X[b][h][r];
      if (p == 1) n++;
      if (p == -1) k++;
    end
    if (n > 8) n = 8;
    if (k > 8) k = 8;
  endfunction

  function automatic int wrap(int v);   // 12-bit two's complement
    return int'($signed(12'(v)));
  endfunction

  int ref_a [B][N], ref_b [B][N], ref_c [B][N];
  int w1 [B], w2 [B], i1 [B], i2 [B];
  int cyc = 0;
  int n_stall = 0, n_acc = 0, n_alpha = 0, n_shift = 0, n_multi = 0, n_sfu2 = 0, n_quant = 0,
      n_sfu = 0, n_par = 0, n_setsf = 0;

  for (genvar b = 0; b < B; b++) begin : g_mon
    always @(posedge clk) begin
      if (stall[b]) n_stall++;
      if (|dut.g_bank[b].u_bank.tile_rd_en && dut.g_bank[b].u_bank.u_sched.ins.acc) n_acc++;
      if (|dut.g_bank[b].u_bank.tile_rd_en && dut.g_bank[b].u_bank.tile_alpha) n_alpha++;
      if (|dut.g_bank[b].u_bank.tile_rd_en && dut.g_bank[b].u_bank.tile_isb != 0) n_shift++;
      if ($countones(dut.g_bank[b].u_bank.tile_rd_en) > 1) n_multi++;
      if (dut.g_bank[b].u_bank.sfu_start) n_sfu++;
      if (dut.g_bank[b].u_bank.sfu_start &&
          (dut.g_bank[b].u_bank.sfu_op == OP_TANH || dut.g_bank[b].u_bank.sfu_op == OP_SIGM)) n_sfu2++;
      if (dut.g_bank[b].u_bank.sched_act_we) n_quant++;
      if (|dut.g_bank[b].u_bank.sf_we) n_setsf++;
    end
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (&busy) n_par++;
  end

  initial begin
    #50000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, ncyc;
    int dcnt [B];
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < B; b++) begin
      nprog[b] = 0;
      w1[b] = 1 + b; w2[b] = 2 + (b % 2); i1[b] = 1 + (b % 3); i2[b] = 2;
    end
    // ---- weights: all tiles, blocks 0..1, all banks in parallel ----
    for (int t = 0; t < TILES; t++) for (int r = 0; r < 2 * L; r++) begin
      for (int b = 0; b < B; b++) begin
        wt_we[b] = 1; wt_tile[b] = $clog2(TILES)'(t); wt_row[b] = 8'(r);
        for (int c = 0; c < N; c++) begin
          W[b][t][r][c] = tern($urandom_range(0, 9));
          wt_data[b][c] = enc(W[b][t][r][c]);
        end
      end
      @(posedge clk); #1;
    end
    wt_we = '0;
    for (int b = 0; b < B; b++) begin
      // ---- layer A: h = 16*blk + 8*step + t ----
      int xa [TILES][2][L];
      int act [4][2][L];
      for (int t = 0; t < TILES; t++) for (int k = 0; k < 2; k++) for (int r = 0; r < L; r++)
        xa[t][k][r] = tern($urandom_range(0, 9));
      for (int k = 0; k < 2; k++) for (int s = 0; s < 2; s++) for (int t = 0; t < TILES; t++)
        for (int r = 0; r < L; r++)
          X[b][16 * k + 8 * s + t][r] = (s == 0) ? int'(xa[t][k][r] == 1) : int'(xa[t][k][r] == -1);
      for (int e = 0; e < 16; e++) put_act(b, e);
      for (int c = 0; c < N; c++) begin
        int v; v = 0;
        for (int t = 0; t < TILES; t++) for (int k = 0; k < 2; k++) begin
          int n, kk;
          counts(b, t, k, c, 16 * k + t, n, kk);     v += i1[b] * (w1[b] * n - w2[b] * kk);
          counts(b, t, k, c, 16 * k + 8 + t, n, kk); v += -i2[b] * (w1[b] * n - w2[b] * kk);
        end
        ref_a[b][c] = wrap(v);
      end
      // ---- layer B: 2-bit activations, h = 64 + 8*blk + 4*bit + t, tiles 0..3 ----
      for (int t = 0; t < 4; t++) for (int k = 0; k < 2; k++) for (int r = 0; r < L; r++) act[t][k][r] = $urandom_range(0, 3);
      for (int k = 0; k < 2; k++) for (int bit_ = 0; bit_ < 2; bit_++) for (int t = 0; t < 4; t++)
        for (int r = 0; r < L; r++) X[b][64 + 8 * k + 4 * bit_ + t][r] = (act[t][k][r] >> bit_) & 1;
      for (int e = 32; e < 40; e++) put_act(b, e);
      for (int c = 0; c < N; c++) begin
        int v; v = 0;
        for (int t = 0; t < 4; t++) for (int k = 0; k < 2; k++) for (int bit_ = 0; bit_ < 2; bit_++) begin
          int n, kk;
          counts(b, t, k, c, 64 + 8 * k + 4 * bit_ + t, n, kk);
          v += (n - kk) << bit_;
        end
        ref_b[b][c] = v;
      end
      // ---- layer C: ternary inputs = quant(A entry 3, thr 6), written to act
      // entry 1000 (half-words 2000, 2001); tiles 0..1, block 0, unweighted ----
      for (int p = 0; p < M; p++) begin
        int x; x = ref_a[b][3 * M + p];
        X[b][2000 + p / L][p % L] = (x > 6) ? 1 : (x < -6) ? -1 : 0;
      end
      for (int c = 0; c < N; c++) begin
        int v; v = 0;
        for (int t = 0; t < 2; t++) begin
          int n, kk;
          counts(b, t, 0, c, 2000 + t, n, kk);
          v += n - kk;
        end
        ref_c[b][c] = v;
      end
      // ---- program ----
      put(b, mk(OP_SETSF, (1 << TILES) - 1, w1[b], 0, 0, 0, 0, 0, 0));
      put(b, mk(OP_SETSF, (1 << TILES) - 1, w2[b], 1, 0, 0, 0, 0, 0));
      put(b, mk(OP_SETSF, (1 << TILES) - 1, i1[b], 2, 0, 0, 0, 0, 0));
      put(b, mk(OP_SETSF, (1 << TILES) - 1, i2[b], 3, 0, 0, 0, 0, 0));
      for (int k = 0; k < 2; k++) for (int s = 0; s < 2; s++)
        put(b, mk(OP_COMPUTE, (1 << TILES) - 1, k, 0, s, (k + s) != 0, 16 * k + 8 * s, 0, 0));
      for (int a = 0; a < 4; a++) put(b, mk(OP_SETSF, (1 << TILES) - 1, 1, a, 0, 0, 0, 0, 0));
      for (int k = 0; k < 2; k++) for (int bit_ = 0; bit_ < 2; bit_++)
        put(b, mk(OP_COMPUTE, 8'h0F, k, bit_, 0, (k + bit_) != 0, 64 + 8 * k + 4 * bit_, 32, 0));
      put(b, mk(OP_RELU,  0, 0, 0, 0, 0, 0, 0, 64));
      put(b, mk(OP_TANH,  0, 0, 0, 0, 0, 0, 1, 65));
      put(b, mk(OP_SIGM,  0, 0, 0, 0, 0, 0, 2, 66));
      put(b, mk(OP_MAX,   0, 0, 0, 0, 0, 0, 32, 33));
      put(b, mk(OP_ADD,   0, 0, 0, 0, 0, 0, 34, 35));
      put(b, mk(OP_QUANT, 0, 0, 0, 0, 0, 1000, 3, 6));
      put(b, mk(OP_COMPUTE, 8'h03, 0, 0, 0, 0, 2000, 48, 0));
      put(b, mk(OP_HALT,  0, 0, 0, 0, 0, 0, 0, 0));
    end
    // ---- run all banks together ----
    t0 = cyc;
    start = '1; @(posedge clk); #1; start = '0;
    for (int b = 0; b < B; b++) dcnt[b] = 0;
    ncyc = 0;
    while (!(dcnt[0] > 0 && dcnt[B-1] > 0)) begin
      @(posedge clk); #1;
      for (int b = 0; b < B; b++) if (done[b]) dcnt[b]++;
      ncyc++;
    end
    $display("programs ran %0d cycles", ncyc);
    // the same program on every bank, so all finish together
    checks++; if (busy != '0) begin failures++; $display("FAIL banks still busy"); end
    // ---- check ----
    for (int b = 0; b < B; b++) begin
      for (int e = 0; e < G; e++) begin
        ps_raddr[b] = 7'(e); #1;
        for (int p = 0; p < M; p++) begin
          checks++;
          if (ps_rdata[b][p] !== 12'(ref_a[b][e * M + p])) begin
            failures++; if (failures < 10) $display("FAIL bank %0d A col %0d got %0d exp %0d", b, e * M + p, $signed(ps_rdata[b][p]), ref_a[b][e * M + p]);
          end
        end
        ps_raddr[b] = 7'(32 + e); #1;
        for (int p = 0; p < M; p++) begin
          int exp;
          exp = ref_b[b][e * M + p];
          if (e == 1) exp = ref_b[b][M + p] > ref_b[b][p] ? ref_b[b][M + p] : ref_b[b][p];
          if (e == 3) exp = ref_b[b][2 * M + p] + ref_b[b][3 * M + p];
          checks++;
          if (ps_rdata[b][p] !== 12'(exp)) begin
            failures++; if (failures < 10) $display("FAIL bank %0d B entry %0d lane %0d got %0d exp %0d", b, e, p, $signed(ps_rdata[b][p]), exp);
          end
        end
        ps_raddr[b] = 7'(48 + e); #1;
        for (int p = 0; p < M; p++) begin
          checks++;
          if (ps_rdata[b][p] !== 12'(ref_c[b][e * M + p])) begin
            failures++; if (failures < 10) $display("FAIL bank %0d C col %0d got %0d exp %0d", b, e * M + p, $signed(ps_rdata[b][p]), ref_c[b][e * M + p]);
          end
        end
      end
      for (int p = 0; p < M; p++) begin
        int x, e;
        ps_raddr[b] = 7'(64); #1; x = ref_a[b][p];
        checks++; if ($signed(ps_rdata[b][p]) != (x < 0 ? 0 : x)) begin failures++; $display("FAIL bank %0d relu %0d", b, p); end
        ps_raddr[b] = 7'(65); #1; x = ref_a[b][M + p]; e = x > 16 ? 16 : x < -16 ? -16 : x;
        checks++; if ($signed(ps_rdata[b][p]) != e) begin failures++; $display("FAIL bank %0d tanh %0d", b, p); end
        ps_raddr[b] = 7'(66); #1; x = ref_a[b][2 * M + p]; e = (x >>> 2) + 8; e = e > 16 ? 16 : e < 0 ? 0 : e;
        checks++; if ($signed(ps_rdata[b][p]) != e) begin failures++; $display("FAIL bank %0d sigm %0d", b, p); end
        act_raddr[b] = 11'(1000); #1;
        checks++;
        if (act_rdata[b][p] !== enc(X[b][2000 + p / L][p % L])) begin failures++; $display("FAIL bank %0d quant %0d", b, p); end
      end
    end
    // ---- mechanisms ----
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_acc == 0)   begin failures++; $display("FAIL no PCU accumulation"); end
    checks++; if (n_alpha == 0) begin failures++; $display("FAIL no second asymmetric step"); end
    checks++; if (n_shift == 0) begin failures++; $display("FAIL no input-bit shift"); end
    checks++; if (n_multi == 0) begin failures++; $display("FAIL no multi-tile reduction"); end
    checks++; if (n_sfu2 == 0)  begin failures++; $display("FAIL no 2-pass SFU op"); end
    checks++; if (n_sfu != 6 * B) begin failures++; $display("FAIL sfu ops %0d", n_sfu); end
    checks++; if (n_quant != B) begin failures++; $display("FAIL quantise writes %0d", n_quant); end
    checks++; if (n_par == 0)   begin failures++; $display("FAIL banks never ran together"); end
    checks++; if (n_setsf == 0) begin failures++; $display("FAIL no scale-factor mode switch"); end
    $display("stalls=%0d acc=%0d steps=%0d shifts=%0d multi-tile=%0d sfu=%0d 2-pass=%0d quant=%0d all-busy cycles=%0d setsf=%0d",
             n_stall, n_acc, n_alpha, n_shift, n_multi, n_sfu, n_sfu2, n_quant, n_par, n_setsf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
