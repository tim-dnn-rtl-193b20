// tim_col_driver: column drivers of a TiM tile for row writes.
//
// During a write, each of the N columns drives its bitline pair and source
// lines so that the enabled row stores one ternary word: bit A (through BL
// and SL2) and bit B (through BLB and SL1). The storage encoding is the
// paper's: 0 -> A=0, +1 -> A=1,B=0, -1 -> A=1,B=1; for 0 the don't-care B is
// written as 0. 'drive' tells the array that the drivers are active.
// Combinational.
module tim_col_driver #(
  parameter int unsigned N = 256
) (
  input  logic              write_en,
  input  logic [N-1:0][1:0] tw,      // ternary write words TW[1..N]
  output logic [N-1:0]      a,
  output logic [N-1:0]      b,
  output logic              drive
);
  always_comb begin
    for (int c = 0; c < N; c++) begin
      unique case (tw[c])
        2'b01:   begin a[c] = 1'b1; b[c] = 1'b0; end
        2'b10:   begin a[c] = 1'b1; b[c] = 1'b1; end
        default: begin a[c] = 1'b0; b[c] = 1'b0; end
      endcase
    end
    drive = write_en;
  end
endmodule
