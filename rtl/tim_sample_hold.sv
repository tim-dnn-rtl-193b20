// tim_sample_hold: behavioural model of the tile's sample-and-hold unit.
//
// This is a behavioural model of an analog circuit. At the end of an array
// access ('sample' high at a clock edge) it captures the final BL and BLB
// voltages of all N columns and holds them, ideally and without droop, while
// the PCUs digitise them group by group. Holding the voltages is what lets
// the TPC array and the PCUs work as a two-stage pipeline, as the paper
// describes. Voltages are carried as millivolts. The held values start at
// VDD (1000 mV) after reset, which is this design's choice.
module tim_sample_hold
  import tim_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sample,
  input  logic [N-1:0][MV_W-1:0]    v_bl_in,
  input  logic [N-1:0][MV_W-1:0]    v_blb_in,
  output logic [N-1:0][MV_W-1:0]    v_bl,
  output logic [N-1:0][MV_W-1:0]    v_blb
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin
        v_bl[c]  <= 10'd1000;
        v_blb[c] <= 10'd1000;
      end
    end else if (sample) begin
      v_bl  <= v_bl_in;
      v_blb <= v_blb_in;
    end
  end
endmodule
