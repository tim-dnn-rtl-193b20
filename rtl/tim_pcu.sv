// tim_pcu: Peripheral Compute Unit of a TiM tile.
//
// One PCU digitises the held BL and BLB voltages of one column with two
// ADCs, giving n (cells whose product is +1) and k (cells whose product is
// -1), and turns them into a partial sum:
//   psum_out = ((W1*n - W2*k) * I_alpha) << isb + psum_in
// W1 and W2 are the weight scale factors of an asymmetric {-W2, 0, W1}
// ternary system, I_alpha is the input scale of the current step (+I1 or
// -I2), the shift weighs the input bit of a bit-serial multi-bit activation,
// and psum_in lets partial sums from other blocks or steps be added. The
// order of these operations follows the paper's PCU drawing. With W1 = W2 =
// I_alpha = 1 and isb = 0 it reduces to the unweighted n - k. Scale factors
// are SF_W-bit unsigned integers and the result wraps to PSUM_W bits; both are
// this design's choices. Combinational.
module tim_pcu
  import tim_pkg::*;
#(
  parameter int unsigned NMAX = 8
) (
  input  logic [MV_W-1:0]          v_bl,
  input  logic [MV_W-1:0]          v_blb,
  input  logic [SF_W-1:0]          w1,
  input  logic [SF_W-1:0]          w2,
  input  logic signed [SF_W:0]     i_alpha,
  input  logic [ISB_W-1:0]         isb,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out,
  output logic [ADC_W-1:0]         n,
  output logic [ADC_W-1:0]         k
);
  tim_adc #(.NMAX(NMAX)) u_adc_bl  (.v_mv(v_bl),  .code(n));
  tim_adc #(.NMAX(NMAX)) u_adc_blb (.v_mv(v_blb), .code(k));

  logic signed [15:0] wn, wk, diff, scaled;
  logic signed [19:0] shifted;
  always_comb begin
    wn       = 16'(signed'({1'b0, n}) * signed'({1'b0, w1}));
    wk       = 16'(signed'({1'b0, k}) * signed'({1'b0, w2}));
    diff     = wn - wk;
    scaled   = 16'(diff * 16'(i_alpha));
    shifted  = 20'(scaled) <<< isb;
    psum_out = PSUM_W'(shifted + 20'(psum_in));
  end
endmodule
