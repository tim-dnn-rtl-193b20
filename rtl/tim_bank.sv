// tim_bank: one bank of the TiM-DNN accelerator.
//
// A bank groups TILES TiM tiles with an activation buffer, a partial-sum
// buffer, a global reduce unit (RU), a special function unit (SFU), an
// instruction memory and a scheduler, as in the paper's accelerator figure.
// Data flow of a COMPUTE instruction:
//  * input channel: tile t receives the L-element ternary half-word
//    aaddr + t of the activation buffer, so the selected tiles together take
//    a slice of up to TILES*L inputs, and each multiplies its part with the
//    addressed block of its weights in one array access;
//  * output channel: in each of the next N/M cycles every selected tile
//    delivers one group of M partial sums; the RU adds them lane by lane
//    across tiles and the result is written to psum-buffer entry
//    paddr + group.
// With 'acc' set, the psum-buffer entry being overwritten is first fed to
// the PCU psum-in of the lowest-numbered selected tile, so that partial sums
// of several blocks, of the two steps of an asymmetric ternary system, or of
// several input bits are accumulated in the PCUs. SFU instructions read one
// or two psum entries and write a psum entry, or quantise one entry into
// 2L ternary activations of the activation buffer.
//
// Bus side (plain signals): instruction-memory writes, activation-buffer
// writes and reads, weight-row writes into any tile, psum-buffer reads,
// start / busy / done, and stall (high while the scheduler waits for the
// tiles). The host should write the buffers and weights only
// while the bank is not busy (weights may also be rewritten between runs,
// which is how layers larger than the tiles are executed over time). The
// partitioning of these ports is this design's choice: the paper only
// draws a bus.
module tim_bank
  import tim_pkg::*;
#(
  parameter int unsigned TILES      = 8,
  parameter int unsigned L          = 16,
  parameter int unsigned K          = 16,
  parameter int unsigned N          = 256,
  parameter int unsigned M          = 32,
  parameter int unsigned NMAX       = 8,
  parameter int unsigned ACT_BYTES  = 16384,
  parameter int unsigned PSUM_BYTES = 8192,
  parameter int unsigned IMEM_DEPTH = 128,
  localparam int unsigned PADDR_W   = $clog2(PSUM_BYTES / (2 * M)),
  localparam int unsigned AADDR_W   = $clog2(ACT_BYTES * 4 / L),
  localparam int unsigned TW        = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // instruction memory load
  input  logic                          im_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] im_waddr,
  input  logic [INSTR_W-1:0]            im_wdata,
  // activation buffer access
  input  logic                          act_we,
  input  logic [AADDR_W-2:0]            act_waddr,
  input  logic [2*L-1:0][1:0]           act_wdata,
  input  logic [AADDR_W-2:0]            act_raddr,
  output logic [2*L-1:0][1:0]           act_rdata,
  // weight rows
  input  logic                          wt_we,
  input  logic [TW-1:0]                 wt_tile,
  input  logic [$clog2(L*K)-1:0]        wt_row,
  input  logic [N-1:0][1:0]             wt_data,
  // psum buffer read
  input  logic [PADDR_W-1:0]            ps_raddr,
  output logic [M-1:0][PSUM_W-1:0]      ps_rdata,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic                          stall
);
  localparam int unsigned GW = $clog2(N / M);

  // ---------------- instruction memory and scheduler ----------------
  logic [$clog2(IMEM_DEPTH)-1:0] imem_raddr;
  logic [INSTR_W-1:0]            imem_rdata;

  tim_instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk(clk), .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .raddr(imem_raddr), .rdata(imem_rdata));

  logic [TILES-1:0]     tile_ready, tile_valid, tile_rd_en, sf_we;
  logic                 tiles_idle;
  logic [$clog2(K)-1:0] tile_blk;
  logic [ISB_W-1:0]     tile_isb;
  logic                 tile_alpha;
  logic [AADDR_W-1:0]   sched_act_raddr;
  logic [1:0]           sf_addr;
  logic [SF_W-1:0]      sf_wdata;
  logic [TILES-1:0]     wb_mask;
  logic                 wb_acc;
  logic [PADDR_W-1:0]   wb_paddr;
  logic                 sfu_start, sfu_done, sfu_busy;
  op_e                  sfu_op;
  logic [PADDR_W-1:0]   sfu_paddr_a, sfu_paddr_b, sched_psum_waddr;
  logic [6:0]           sfu_thr;
  logic                 sched_psum_we, sched_act_we;
  logic [AADDR_W-2:0]   sched_act_waddr;

  tim_scheduler #(.TILES(TILES), .IMEM_DEPTH(IMEM_DEPTH), .K(K), .PADDR_W(PADDR_W), .AADDR_W(AADDR_W)) u_sched (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done), .stall(stall),
    .imem_raddr(imem_raddr), .imem_rdata(imem_rdata),
    .tile_ready(tile_ready), .tiles_idle(tiles_idle), .tile_rd_en(tile_rd_en), .tile_blk(tile_blk),
    .tile_isb(tile_isb), .tile_alpha(tile_alpha), .act_raddr(sched_act_raddr),
    .sf_we(sf_we), .sf_addr(sf_addr), .sf_wdata(sf_wdata),
    .wb_mask(wb_mask), .wb_acc(wb_acc), .wb_paddr(wb_paddr),
    .sfu_start(sfu_start), .sfu_op(sfu_op), .sfu_paddr_a(sfu_paddr_a), .sfu_paddr_b(sfu_paddr_b),
    .sfu_thr(sfu_thr), .sfu_done(sfu_done),
    .psum_we(sched_psum_we), .psum_waddr(sched_psum_waddr), .act_we(sched_act_we), .act_waddr(sched_act_waddr));

  // ---------------- activation buffer (input channel) ----------------
  logic [TILES-1:0][L-1:0][1:0] inp_chan;
  logic [M-1:0][1:0]   sfu_q;
  logic                abuf_we;
  logic [AADDR_W-2:0]  abuf_waddr;
  logic [2*L-1:0][1:0] abuf_wdata;

  always_comb begin
    abuf_we    = sched_act_we | act_we;
    abuf_waddr = sched_act_we ? sched_act_waddr : act_waddr;
    abuf_wdata = act_wdata;
    if (sched_act_we) begin
      abuf_wdata = '0;
      for (int i = 0; i < int'(2 * L) && i < int'(M); i++) abuf_wdata[i] = sfu_q[i];
    end
  end

  tim_act_buffer #(.BYTES(ACT_BYTES), .L(L), .RD_PORTS(TILES)) u_abuf (
    .clk(clk), .we(abuf_we), .waddr(abuf_waddr), .wdata(abuf_wdata),
    .raddr(sched_act_raddr), .rdata(inp_chan), .braddr(act_raddr), .brdata(act_rdata));

  // ---------------- tiles ----------------
  logic [TILES-1:0][GW-1:0]            tile_group;
  logic [TILES-1:0][M-1:0][PSUM_W-1:0] tile_psum_in, tile_psum_out;
  logic [M-1:0][PSUM_W-1:0]            psum_rd_a, psum_rd_b, ru_out, sfu_res;

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    tim_tile #(.L(L), .K(K), .N(N), .M(M), .NMAX(NMAX)) u_tile (
      .clk(clk), .rst_n(rst_n),
      .wr_en(wt_we && (wt_tile == TW'(t))), .wr_row(wt_row), .wr_data(wt_data),
      .sf_we(sf_we[t]), .sf_addr(sf_addr), .sf_wdata(sf_wdata),
      .rd_en(tile_rd_en[t]), .rd_ready(tile_ready[t]), .blk_addr(tile_blk), .inp(inp_chan[t]),
      .isb(tile_isb), .alpha_sel(tile_alpha), .psum_in(tile_psum_in[t]),
      .out_valid(tile_valid[t]), .out_group(tile_group[t]), .psum_out(tile_psum_out[t]));
  end

  assign tiles_idle = ~|tile_valid;

  // ---------------- output channel, RU and write-back ----------------
  logic          wb_valid;
  logic [GW-1:0] wb_group;
  logic [PADDR_W-1:0] wb_addr;

  // group of the access being written back: taken from the lowest selected
  // tile (the selected tiles run in lock step)
  always_comb begin
    logic found;
    wb_group = '0;
    found    = 1'b0;
    for (int t = 0; t < int'(TILES); t++) begin
      if (wb_mask[t] && !found) begin
        found    = 1'b1;
        wb_group = tile_group[t];
      end
    end
  end

  assign wb_valid = |(tile_valid & wb_mask);
  assign wb_addr  = wb_paddr + PADDR_W'(wb_group);

  // accumulation: the old entry enters the PCUs of the lowest selected tile
  always_comb begin
    logic found;
    found = 1'b0;
    for (int t = 0; t < int'(TILES); t++) begin
      tile_psum_in[t] = '0;
      if (wb_mask[t] && !found) begin
        found = 1'b1;
        if (wb_acc) tile_psum_in[t] = psum_rd_a;
      end
    end
  end

  tim_reduce_unit #(.TILES(TILES), .M(M)) u_ru (.mask(wb_mask), .in(tile_psum_out), .out(ru_out));

  logic               pbuf_we;
  logic [PADDR_W-1:0] pbuf_waddr, pbuf_raddr_a;
  logic [M-1:0][PSUM_W-1:0] pbuf_wdata;

  always_comb begin
    pbuf_we      = wb_valid | sched_psum_we;
    pbuf_waddr   = wb_valid ? wb_addr : sched_psum_waddr;
    pbuf_wdata   = wb_valid ? ru_out  : sfu_res;
    pbuf_raddr_a = wb_valid ? wb_addr : sfu_paddr_a;
  end

  tim_psum_buffer #(.BYTES(PSUM_BYTES), .M(M)) u_pbuf (
    .clk(clk), .we(pbuf_we), .waddr(pbuf_waddr), .wdata(pbuf_wdata),
    .raddr_a(pbuf_raddr_a), .rdata_a(psum_rd_a), .raddr_b(sfu_paddr_b), .rdata_b(psum_rd_b),
    .raddr_c(ps_raddr), .rdata_c(ps_rdata));

  // ---------------- SFU ----------------
  tim_sfu #(.M(M)) u_sfu (
    .clk(clk), .rst_n(rst_n), .start(sfu_start), .op(sfu_op), .a(psum_rd_a), .b(psum_rd_b),
    .thr(sfu_thr), .busy(sfu_busy), .done(sfu_done), .res(sfu_res), .q(sfu_q));

  // The reduce unit and the SFU never write the psum buffer in the same cycle.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(wb_valid && sched_psum_we))
    else $error("tim_bank: psum buffer write conflict");
  a_host_quiet: assert property (@(posedge clk) disable iff (!rst_n) (act_we || wt_we || im_we) |-> !busy)
    else $error("tim_bank: host write while the bank is running");
  a_sfu_free: assert property (@(posedge clk) disable iff (!rst_n) sfu_start |-> !sfu_busy)
    else $error("tim_bank: SFU started while busy");
endmodule
