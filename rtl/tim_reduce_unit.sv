// tim_reduce_unit: global Reduce Unit (RU) of a TiM bank.
//
// Adds, lane by lane, the M partial sums that the selected tiles of the bank
// put on the output channel in the same cycle, so that a dot product longer
// than one tile's rows can be split over several tiles. Tiles not in 'mask'
// contribute 0. Sums are PSUM_W-bit two's complement and wrap. With 8 tiles
// and M = 32 lanes this is 7 x 32 adders, within the 256 12-bit adders the
// paper budgets for the RU; the lane-wise tree is this design's choice.
// Combinational.
module tim_reduce_unit
  import tim_pkg::*;
#(
  parameter int unsigned TILES = 8,
  parameter int unsigned M     = 32
) (
  input  logic [TILES-1:0]                       mask,
  input  logic [TILES-1:0][M-1:0][PSUM_W-1:0]    in,
  output logic [M-1:0][PSUM_W-1:0]               out
);
  always_comb begin
    for (int p = 0; p < int'(M); p++) begin
      logic [PSUM_W-1:0] s;
      s = '0;
      for (int t = 0; t < int'(TILES); t++) begin
        if (mask[t]) s = s + in[t][p];
      end
      out[p] = s;
    end
  end
endmodule
