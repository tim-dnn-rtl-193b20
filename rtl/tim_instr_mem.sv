// tim_instr_mem: instruction memory of a TiM bank.
//
// DEPTH instructions (128, as in the paper) of INSTR_W bits, written over
// the bus and fetched by the scheduler. The read is synchronous: the
// instruction at raddr appears on rdata one cycle later. The instruction
// format (tim_pkg::instr_t) is this design's own. Contents are not reset.
module tim_instr_mem
  import tim_pkg::*;
#(
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [INSTR_W-1:0]       wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [INSTR_W-1:0]       rdata
);
  logic [INSTR_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
