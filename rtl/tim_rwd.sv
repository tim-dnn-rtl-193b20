// tim_rwd: Read Wordline Driver of one block of a TiM tile.
//
// Applies the ternary input vector Inp[1..L] to the L rows of a block when
// the block enable bEN is set. Input bit 0 of each element drives WL_R1 and
// bit 1 drives WL_R2, which is the cell's input encoding (+1 -> WL_R1,
// -1 -> WL_R2, 0 -> neither), as in the paper's RWD drawing. The unused code
// 2'b11 is masked so that a cell never sees both wordlines (this design's
// choice). Combinational.
module tim_rwd #(
  parameter int unsigned L = 16
) (
  input  logic             ben,
  input  logic [L-1:0][1:0] inp,
  output logic [L-1:0]     wlr1,
  output logic [L-1:0]     wlr2
);
  always_comb begin
    for (int i = 0; i < L; i++) begin
      wlr1[i] = ben & inp[i][0] & ~inp[i][1];
      wlr2[i] = ben & inp[i][1] & ~inp[i][0];
    end
  end
endmodule
