// tim_act_buffer: activation buffer of a TiM bank.
//
// Holds the ternary activations that feed the input channel to the tiles
// of the bank. The paper
// gives the capacity (16 KB); the organisation is this design's: ENTRIES
// entries of 2L ternary codes (64 bits at the defaults), written whole (by
// the bus or by the 2L quantisation units of the SFU) and read by the tiles
// one half at a time. The tile-side port has RD_PORTS outputs: output t
// returns half-word raddr + t (half-word h is entry h/2, half h%2), so that
// each of the tiles of one access gets its own slice of the input vector.
// A multi-bit activation is kept as separate {0, +1} bit planes, one per
// input bit, for bit-serial evaluation. A second read port serves the bus. Reads are asynchronous, the
// write takes effect at the clock edge. Contents are not reset.
module tim_act_buffer
  import tim_pkg::*;
#(
  parameter int unsigned BYTES = 16384,
  parameter int unsigned L     = 16,
  parameter int unsigned RD_PORTS = 8
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(BYTES*4/(2*L))-1:0] waddr,
  input  logic [2*L-1:0][1:0]           wdata,
  input  logic [$clog2(BYTES*4/L)-1:0]  raddr,
  output logic [RD_PORTS-1:0][L-1:0][1:0] rdata,
  input  logic [$clog2(BYTES*4/(2*L))-1:0] braddr,
  output logic [2*L-1:0][1:0]           brdata
);
  localparam int unsigned ENTRIES = BYTES * 4 / (2 * L);  // 4 ternary codes per byte

  logic [2*L-1:0][1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int t = 0; t < int'(RD_PORTS); t++) begin
      logic [$bits(raddr)-1:0] h;
      logic [2*L-1:0][1:0]     rword;
      h        = raddr + $bits(raddr)'(t);
      rword    = mem[h[$bits(raddr)-1:1]];
      rdata[t] = h[0] ? rword[2*L-1:L] : rword[L-1:0];
    end
  end
  assign brdata = mem[braddr];
endmodule
