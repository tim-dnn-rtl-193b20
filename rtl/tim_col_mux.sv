// tim_col_mux: N:M column multiplexer between the S/H and the PCUs.
//
// The M PCUs of a tile serve its N columns in N/M turns. col_sel = g routes
// the held BL and BLB voltages of columns g*M .. g*M+M-1 to PCUs 0..M-1.
// The paper gives the N:M ratio and the col-sel signal; the contiguous
// grouping is this design's choice. Combinational.
module tim_col_mux
  import tim_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned M = 32
) (
  input  logic [$clog2(N/M)-1:0]    col_sel,
  input  logic [N-1:0][MV_W-1:0]    v_bl_in,
  input  logic [N-1:0][MV_W-1:0]    v_blb_in,
  output logic [M-1:0][MV_W-1:0]    v_bl,
  output logic [M-1:0][MV_W-1:0]    v_blb
);
  always_comb begin
    for (int p = 0; p < M; p++) begin
      v_bl[p]  = v_bl_in[int'(col_sel) * M + p];
      v_blb[p] = v_blb_in[int'(col_sel) * M + p];
    end
  end
endmodule
