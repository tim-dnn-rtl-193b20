// tim_psum_buffer: partial-sum (Psum) buffer of a TiM bank.
//
// Stores vectors of M partial sums, the width of one tile output group. The
// paper gives the capacity (8 KB); the organisation is this design's: each
// PSUM_W-bit sum takes a 2-byte slot, giving BYTES/(2*M) entries (128 at the
// defaults). One synchronous write port (reduce unit or SFU) and three
// asynchronous read ports: A for PCU accumulation and SFU operand A, B for
// SFU operand B, C for the bus. Contents are not reset.
module tim_psum_buffer
  import tim_pkg::*;
#(
  parameter int unsigned BYTES = 8192,
  parameter int unsigned M     = 32
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(BYTES/(2*M))-1:0]      waddr,
  input  logic [M-1:0][PSUM_W-1:0]            wdata,
  input  logic [$clog2(BYTES/(2*M))-1:0]      raddr_a,
  output logic [M-1:0][PSUM_W-1:0]            rdata_a,
  input  logic [$clog2(BYTES/(2*M))-1:0]      raddr_b,
  output logic [M-1:0][PSUM_W-1:0]            rdata_b,
  input  logic [$clog2(BYTES/(2*M))-1:0]      raddr_c,
  output logic [M-1:0][PSUM_W-1:0]            rdata_c
);
  localparam int unsigned ENTRIES = BYTES / (2 * M);

  logic [M-1:0][PSUM_W-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
  assign rdata_c = mem[raddr_c];
endmodule
