// tim_bitline: behavioural model of the analog accumulation on one bitline.
//
// This is a behavioural model of an analog node, not logic. After precharge
// to VDD, every TPC of the active block whose product discharges this line
// lowers it by about one Delta; the final voltage therefore encodes the
// number of such cells. The model counts the discharging cells and returns
// the SPICE voltage of that state (S0..S10 = 1000, 890, 780, 680, 580, 490,
// 400, 320, 240, 180, 120 mV, as reported in the paper); beyond S10 the line
// saturates at 120 mV. Process variation is not modelled. Combinational.
module tim_bitline
  import tim_pkg::*;
#(
  parameter int unsigned L = 16
) (
  input  logic [L-1:0]      dis,    // discharge request of each cell
  output logic [MV_W-1:0]   v_mv    // final bitline voltage in mV
);
  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int i = 0; i < L; i++) cnt += int'(dis[i]);
    v_mv = bl_state_mv(cnt);
  end
endmodule
