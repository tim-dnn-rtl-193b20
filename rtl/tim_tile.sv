// tim_tile: TiM tile, a ternary in-memory vector-matrix multiply array.
//
// The tile holds an (L*K) x N array of ternary weights arranged as K blocks
// of L rows. It does two things:
//  * Row write: wr_en with wr_row and wr_data (N ternary words) writes one
//    row in one cycle through the row decoder / write-wordline driver and
//    the column drivers.
//  * Vector-matrix multiply: rd_en with blk_addr and an L-element ternary
//    input vector computes Inp . W for the L x N matrix of that block in a
//    single array access. The block decoder raises one block enable, the
//    Read Wordline Drivers put the inputs on the read wordlines, every TPC
//    discharges BL or BLB by one step according to its signed product, and
//    the bitline voltages encode per column n (+1 products) and k (-1
//    products). A sample-and-hold captures all N column voltages; an N:M
//    column multiplexer then feeds them to the M PCUs in N/M groups, which
//    digitise and scale them (see tim_pcu).
// The S/H makes the array and the PCUs a two-stage pipeline, as in the
// paper: an access accepted in cycle t produces column group g (columns
// g*M .. g*M+M-1) on psum_out in cycle t+1+g, and the next access is
// accepted in the cycle of the last group, so the tile sustains one access
// every N/M cycles (8 at the defaults). rd_en must only be raised while
// rd_ready is high. psum_in is combinational: it must carry the partial sums
// for out_group while out_valid is high. Scale registers should be written
// only while the tile is idle. The exact cycle timing is this design's
// choice; the paper only states that the PCU bandwidth is matched to the
// array.
//
// The array stores the two bits of every cell; the read paths of the cells
// of the selected block are evaluated by an L x N plane of tim_tpc
// instances fed with that block's stored bits. This is functionally the same
// as every cell owning a read path, because only the enabled block's
// wordlines are active, and keeps simulation size reasonable.
module tim_tile
  import tim_pkg::*;
#(
  parameter int unsigned L    = 16,
  parameter int unsigned K    = 16,
  parameter int unsigned N    = 256,
  parameter int unsigned M    = 32,
  parameter int unsigned NMAX = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // row write
  input  logic                          wr_en,
  input  logic [$clog2(L*K)-1:0]        wr_row,
  input  logic [N-1:0][1:0]             wr_data,
  // scale factor registers
  input  logic                          sf_we,
  input  logic [1:0]                    sf_addr,
  input  logic [SF_W-1:0]               sf_wdata,
  // vector-matrix multiply
  input  logic                          rd_en,
  output logic                          rd_ready,
  input  logic [$clog2(K)-1:0]          blk_addr,
  input  logic [L-1:0][1:0]             inp,
  input  logic [ISB_W-1:0]              isb,
  input  logic                          alpha_sel,
  input  logic [M-1:0][PSUM_W-1:0]      psum_in,
  output logic                          out_valid,
  output logic [$clog2(N/M)-1:0]        out_group,
  output logic [M-1:0][PSUM_W-1:0]      psum_out
);
  localparam int unsigned ROWS = L * K;
  localparam int unsigned GRPS = N / M;
  localparam int unsigned GW   = $clog2(GRPS);

  // ---------------- storage and write path ----------------
  logic [N-1:0] cell_a [ROWS];
  logic [N-1:0] cell_b [ROWS];
  logic [ROWS-1:0] wl_w;
  logic [N-1:0]    drv_a, drv_b;
  logic            drv_en;

  tim_row_decoder #(.ROWS(ROWS)) u_rowdec (.write_en(wr_en), .row_addr(wr_row), .wl_w(wl_w));
  tim_col_driver  #(.N(N)) u_coldrv (.write_en(wr_en), .tw(wr_data), .a(drv_a), .b(drv_b), .drive(drv_en));

  always_ff @(posedge clk) begin
    if (drv_en) begin
      for (int r = 0; r < int'(ROWS); r++) begin
        if (wl_w[r]) begin
          cell_a[r] <= drv_a;
          cell_b[r] <= drv_b;
        end
      end
    end
  end

  // ---------------- pipeline control ----------------
  logic          busy;
  logic [GW-1:0] grp;
  logic [ISB_W-1:0] isb_q;
  logic          alpha_q;
  logic          accept;

  assign rd_ready = !busy || (grp == GW'(GRPS - 1));
  assign accept   = rd_en && rd_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      grp     <= '0;
      isb_q   <= '0;
      alpha_q <= 1'b0;
    end else if (accept) begin
      busy    <= 1'b1;
      grp     <= '0;
      isb_q   <= isb;
      alpha_q <= alpha_sel;
    end else if (busy) begin
      if (grp == GW'(GRPS - 1)) busy <= 1'b0;
      else                      grp  <= grp + 1'b1;
    end
  end

  // ---------------- compute path: decoder, RWDs, TPCs, bitlines ----------------
  logic [K-1:0]          ben;
  logic [K-1:0][L-1:0]   wlr1_b, wlr2_b;
  logic [L-1:0]          wlr1, wlr2;

  tim_block_decoder #(.K(K)) u_blkdec (.read_en(accept), .blk_addr(blk_addr), .ben(ben));

  for (genvar kb = 0; kb < K; kb++) begin : g_rwd
    tim_rwd #(.L(L)) u_rwd (.ben(ben[kb]), .inp(inp), .wlr1(wlr1_b[kb]), .wlr2(wlr2_b[kb]));
  end

  always_comb begin
    wlr1 = '0;
    wlr2 = '0;
    for (int kb = 0; kb < int'(K); kb++) begin
      wlr1 |= wlr1_b[kb];
      wlr2 |= wlr2_b[kb];
    end
  end

  // stored bits of the L rows of the addressed block
  logic [L-1:0][N-1:0] sel_a, sel_b;
  always_comb begin
    for (int r = 0; r < int'(L); r++) begin
      sel_a[r] = cell_a[int'(blk_addr) * int'(L) + r];
      sel_b[r] = cell_b[int'(blk_addr) * int'(L) + r];
    end
  end

  logic [N-1:0][L-1:0]        dis_bl, dis_blb;
  logic [N-1:0][MV_W-1:0]     v_bl, v_blb;

  for (genvar c = 0; c < N; c++) begin : g_col
    for (genvar r = 0; r < L; r++) begin : g_row
      tim_tpc u_tpc (.a(sel_a[r][c]), .b(sel_b[r][c]), .wlr1(wlr1[r]), .wlr2(wlr2[r]),
                     .dis_bl(dis_bl[c][r]), .dis_blb(dis_blb[c][r]));
    end
    tim_bitline #(.L(L)) u_bl  (.dis(dis_bl[c]),  .v_mv(v_bl[c]));
    tim_bitline #(.L(L)) u_blb (.dis(dis_blb[c]), .v_mv(v_blb[c]));
  end

  // ---------------- S/H, column mux, PCUs ----------------
  logic [N-1:0][MV_W-1:0] h_bl, h_blb;
  logic [M-1:0][MV_W-1:0] m_bl, m_blb;

  tim_sample_hold #(.N(N)) u_sh (.clk(clk), .rst_n(rst_n), .sample(accept),
                                 .v_bl_in(v_bl), .v_blb_in(v_blb), .v_bl(h_bl), .v_blb(h_blb));

  tim_col_mux #(.N(N), .M(M)) u_cmux (.col_sel(grp), .v_bl_in(h_bl), .v_blb_in(h_blb),
                                      .v_bl(m_bl), .v_blb(m_blb));

  logic [SF_W-1:0] w1, w2, i1, i2;
  logic signed [SF_W:0] i_alpha;

  tim_scale_regs u_sf (.clk(clk), .rst_n(rst_n), .we(sf_we), .addr(sf_addr), .wdata(sf_wdata),
                       .w1(w1), .w2(w2), .i1(i1), .i2(i2));

  assign i_alpha = alpha_q ? -signed'({1'b0, i2}) : signed'({1'b0, i1});

  // n and k of each PCU are internal observation points (not used further)
  logic [M-1:0][ADC_W-1:0] pcu_n, pcu_k;
  for (genvar p = 0; p < M; p++) begin : g_pcu
    tim_pcu #(.NMAX(NMAX)) u_pcu (
      .v_bl(m_bl[p]), .v_blb(m_blb[p]), .w1(w1), .w2(w2), .i_alpha(i_alpha), .isb(isb_q),
      .psum_in(psum_in[p]), .psum_out(psum_out[p]), .n(pcu_n[p]), .k(pcu_k[p]));
  end

  assign out_valid = busy;
  assign out_group = grp;

  // An access may only be started when the tile can take it.
  a_rd_handshake: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> rd_ready)
    else $error("tim_tile: rd_en while not ready");
  a_sf_idle: assert property (@(posedge clk) disable iff (!rst_n) sf_we |-> !busy)
    else $error("tim_tile: scale register written during an access");
endmodule
