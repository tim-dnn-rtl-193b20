// tb_tim_scheduler: runs a short program against simple models of the
// tiles (busy for 8 cycles per access, ready in the last one) and of the
// SFU (done 2 cycles after start). Checks the order and cycle of every tile
// access, scale-register write and SFU operation, the write-back fields,
// that COMPUTE issues back to back every 8 cycles (with stalls in between),
// that SFU/SETSF/HALT wait for the tiles to drain, and the done pulse.
module tb_tim_scheduler;
  import tim_pkg::*;
  localparam int T = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, stall;
  logic [6:0] imem_raddr; logic [INSTR_W-1:0] imem_rdata;
  logic [T-1:0] tile_ready, tile_rd_en, sf_we, wb_mask;
  logic tiles_idle; logic [3:0] tile_blk; logic [1:0] tile_isb, sf_addr; logic tile_alpha;
  logic [11:0] act_raddr; logic [3:0] sf_wdata; logic wb_acc; logic [6:0] wb_paddr;
  logic sfu_start, sfu_done; op_e sfu_op; logic [6:0] sfu_paddr_a, sfu_paddr_b, psum_waddr; logic [6:0] sfu_thr;
  logic psum_we, act_we; logic [10:0] act_waddr;

  tim_scheduler #(.TILES(T)) dut (.*);
  always #5 clk = ~clk;

  // instruction memory model (synchronous read)
  instr_t prog [128];
  always_ff @(posedge clk) imem_rdata <= prog[imem_raddr];

  // tile model
  int tcnt = 0;
  assign tile_ready = (tcnt <= 1) ? '1 : '0;
  assign tiles_idle = (tcnt == 0);
  always_ff @(posedge clk) if (|tile_rd_en) tcnt <= 8; else if (tcnt > 0) tcnt <= tcnt - 1;

  // SFU model
  int scnt = 0;
  assign sfu_done = (scnt == 1);
  always_ff @(posedge clk) if (sfu_start) scnt <= 2; else if (scnt > 0) scnt <= scnt - 1;

  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  int compute_cyc [$], sfu_cyc [$], n_stall = 0, n_sf = 0, n_psum_we = 0, n_act_we = 0, done_cyc = -1;
  always @(posedge clk) if (rst_n) begin
    if (|tile_rd_en) begin
      compute_cyc.push_back(cyc);
      checks++;
      if (!tiles_idle && tcnt != 1) begin failures++; $display("FAIL access while tiles busy"); end
    end
    if (stall) n_stall++;
    if (|sf_we) begin
      n_sf++; checks++;
      if (!tiles_idle || sf_we != 8'h0F || sf_addr != 2 || sf_wdata != 5) begin failures++; $display("FAIL setsf"); end
    end
    if (sfu_start) begin
      sfu_cyc.push_back(cyc); checks++;
      if (!tiles_idle) begin failures++; $display("FAIL sfu started with tiles busy"); end
    end
    if (psum_we) begin
      n_psum_we++; checks++;
      if (psum_waddr != 7'd9 || !sfu_done) begin failures++; $display("FAIL psum_we addr %0d", psum_waddr); end
    end
    if (act_we) begin
      n_act_we++; checks++;
      if (act_waddr != 11'd100 || !sfu_done) begin failures++; $display("FAIL act_we"); end
    end
    if (done) done_cyc = cyc;
  end

  function automatic instr_t mk(op_e op, int tm, int blk, int isb, int alpha, int acc, int aaddr, int paddr, int paddr2);
    instr_t i;
    i = '0; i.op = op; i.tmask = 8'(tm); i.blk = 4'(blk); i.isb = 2'(isb); i.alpha = 1'(alpha);
    i.acc = 1'(acc); i.aaddr = 12'(aaddr); i.paddr = 7'(paddr); i.paddr2 = 7'(paddr2);
    return i;
  endfunction

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prog[0] = mk(OP_SETSF,   8'h0F, 5, 2, 0, 0, 0, 0, 0);
    prog[1] = mk(OP_COMPUTE, 8'h03, 3, 1, 1, 0, 17, 8, 0);
    prog[2] = mk(OP_COMPUTE, 8'h03, 4, 0, 0, 1, 18, 8, 0);
    prog[3] = mk(OP_COMPUTE, 8'hFF, 5, 0, 0, 1, 19, 16, 0);
    prog[4] = mk(OP_RELU,    0, 0, 0, 0, 0, 0, 8, 9);
    prog[5] = mk(OP_QUANT,   0, 0, 0, 0, 0, 100, 8, 3);
    prog[6] = mk(OP_HALT,    0, 0, 0, 0, 0, 0, 0, 0);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    start = 1; @(posedge clk); #1; start = 0;
    // check fields of the second COMPUTE when it issues
    wait (compute_cyc.size() == 1); @(negedge clk);
    checks++;
    if (wb_mask != 8'h03 || wb_acc != 0 || wb_paddr != 8) begin failures++; $display("FAIL wb fields"); end
    wait (|tile_rd_en); #1;
    checks++;
    if (tile_blk != 4 || tile_isb != 0 || tile_alpha != 0 || act_raddr != 18) begin failures++; $display("FAIL compute fields"); end
    wait (done_cyc >= 0);
    repeat (2) @(posedge clk);
    checks++;
    if (compute_cyc.size() != 3 || compute_cyc[1] - compute_cyc[0] != 8 || compute_cyc[2] - compute_cyc[1] != 8) begin
      failures++; $display("FAIL compute spacing");
    end
    checks++;
    // SFU must start after the last access has drained (8 cycles of output)
    if (sfu_cyc.size() != 2 || sfu_cyc[0] < compute_cyc[2] + 8) begin failures++; $display("FAIL sfu timing"); end
    checks++;
    if (n_sf != 1 || n_psum_we != 1 || n_act_we != 1) begin failures++; $display("FAIL counts %0d %0d %0d", n_sf, n_psum_we, n_act_we); end
    checks++;
    if (n_stall == 0 || busy) begin failures++; $display("FAIL stall/busy"); end
    $display("stall cycles=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
