// tim_block_decoder: block decoder of a TiM tile.
//
// Turns a block address of log2(K) bits into the one-hot block enable bEN
// that lets the Read Wordline Drivers of exactly one block (L rows) apply the
// input vector. Enabled by readEN. The paper names the unit and its inputs;
// the one-hot decoder is the simplest circuit with that function.
// Combinational.
module tim_block_decoder #(
  parameter int unsigned K = 16
) (
  input  logic                 read_en,
  input  logic [$clog2(K)-1:0] blk_addr,
  output logic [K-1:0]         ben
);
  always_comb begin
    ben = '0;
    if (read_en) ben[blk_addr] = 1'b1;
  end
endmodule
