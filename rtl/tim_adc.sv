// tim_adc: behavioural model of the flash ADC in each PCU.
//
// This is a behavioural model of an analog converter. It compares a held
// bitline voltage with a ladder of NMAX thresholds and outputs how many it
// lies below, i.e. the number n (or k) of cells that discharged the line.
// Threshold j sits midway between the voltages of states S(j-1) and S(j) of
// the paper's SPICE results (a choice of this design; the paper gives none).
// The code saturates at NMAX = 8, the paper's n_max. The paper also calls
// the ADC 3-bit, which cannot hold 0..8; this model follows n_max and uses
// 4 output bits. Combinational.
module tim_adc
  import tim_pkg::*;
#(
  parameter int unsigned NMAX = 8
) (
  input  logic [MV_W-1:0]  v_mv,
  output logic [ADC_W-1:0] code
);
  always_comb begin
    code = '0;
    for (int unsigned j = 1; j <= NMAX; j++) begin
      if (32'(v_mv) * 2 < 32'(bl_state_mv(j - 1)) + 32'(bl_state_mv(j))) code = ADC_W'(j);
    end
  end
endmodule
