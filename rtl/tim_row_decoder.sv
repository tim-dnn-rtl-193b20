// tim_row_decoder: row decoder and write-wordline driver of a TiM tile.
//
// Turns a row address of log2(ROWS) bits into a one-hot write wordline
// WL_W while writeEN is high, so that one row of N ternary words is written
// per cycle. The paper names the unit; the plain one-hot decoder is this
// design's choice. Combinational.
module tim_row_decoder #(
  parameter int unsigned ROWS = 256
) (
  input  logic                    write_en,
  input  logic [$clog2(ROWS)-1:0] row_addr,
  output logic [ROWS-1:0]         wl_w
);
  always_comb begin
    wl_w = '0;
    if (write_en) wl_w[row_addr] = 1'b1;
  end
endmodule
