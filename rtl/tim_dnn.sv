// tim_dnn: top level of the TiM-DNN ternary in-memory DNN accelerator.
//
// NUM_BANKS independent banks (tim_bank) of TILES TiM tiles each; the
// defaults, 4 banks of 8 tiles with 256 x 256 ternary cells per tile, give
// the 32 tiles and 2 M ternary weights of the evaluated instance. Each bank
// has its own activation and psum buffers, reduce unit, SFU, instruction
// memory and scheduler. The paper states that the accelerator has several
// banks but not how many; 4 x 8 is this design's choice. The system bus and
// the off-chip main memory are outside this design: every bank's bus-side
// signals are brought out as ports indexed by bank, with the meanings given
// in tim_bank.
module tim_dnn
  import tim_pkg::*;
#(
  parameter int unsigned NUM_BANKS  = 4,
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
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic [NUM_BANKS-1:0]                         im_we,
  input  logic [NUM_BANKS-1:0][$clog2(IMEM_DEPTH)-1:0] im_waddr,
  input  logic [NUM_BANKS-1:0][INSTR_W-1:0]            im_wdata,
  input  logic [NUM_BANKS-1:0]                         act_we,
  input  logic [NUM_BANKS-1:0][AADDR_W-2:0]            act_waddr,
  input  logic [NUM_BANKS-1:0][2*L-1:0][1:0]           act_wdata,
  input  logic [NUM_BANKS-1:0][AADDR_W-2:0]            act_raddr,
  output logic [NUM_BANKS-1:0][2*L-1:0][1:0]           act_rdata,
  input  logic [NUM_BANKS-1:0]                         wt_we,
  input  logic [NUM_BANKS-1:0][TW-1:0]                 wt_tile,
  input  logic [NUM_BANKS-1:0][$clog2(L*K)-1:0]        wt_row,
  input  logic [NUM_BANKS-1:0][N-1:0][1:0]             wt_data,
  input  logic [NUM_BANKS-1:0][PADDR_W-1:0]            ps_raddr,
  output logic [NUM_BANKS-1:0][M-1:0][PSUM_W-1:0]      ps_rdata,
  input  logic [NUM_BANKS-1:0]                         start,
  output logic [NUM_BANKS-1:0]                         busy,
  output logic [NUM_BANKS-1:0]                         done,
  output logic [NUM_BANKS-1:0]                         stall
);
  for (genvar bk = 0; bk < NUM_BANKS; bk++) begin : g_bank
    tim_bank #(.TILES(TILES), .L(L), .K(K), .N(N), .M(M), .NMAX(NMAX),
               .ACT_BYTES(ACT_BYTES), .PSUM_BYTES(PSUM_BYTES), .IMEM_DEPTH(IMEM_DEPTH)) u_bank (
      .clk(clk), .rst_n(rst_n),
      .im_we(im_we[bk]), .im_waddr(im_waddr[bk]), .im_wdata(im_wdata[bk]),
      .act_we(act_we[bk]), .act_waddr(act_waddr[bk]), .act_wdata(act_wdata[bk]),
      .act_raddr(act_raddr[bk]), .act_rdata(act_rdata[bk]),
      .wt_we(wt_we[bk]), .wt_tile(wt_tile[bk]), .wt_row(wt_row[bk]), .wt_data(wt_data[bk]),
      .ps_raddr(ps_raddr[bk]), .ps_rdata(ps_rdata[bk]),
      .start(start[bk]), .busy(busy[bk]), .done(done[bk]), .stall(stall[bk]));
  end
endmodule
