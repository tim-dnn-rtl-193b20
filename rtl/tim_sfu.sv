// tim_sfu: Special Function Unit of a TiM bank.
//
// Applies the non-multiply operations of a DNN to one vector of M partial
// sums taken from the psum buffer:
//   OP_RELU         res = max(a, 0)                      (ReLU units)
//   OP_MAX / OP_ADD res = max(a, b) / a + b              (vector PEs: pooling)
//   OP_TANH         res = clamp(a, -1, +1)               (special-function PEs)
//   OP_SIGM         res = clamp(a/4 + 1/2, 0, 1)         (special-function PEs)
//   OP_QUANT        q   = +1 if a > thr, -1 if a < -thr, else 0  (quantisation units)
// The paper lists these unit kinds and their counts (64 ReLUs, 8 vPEs of 4
// lanes, 20 SPEs, 32 QUs) but not their insides. The piecewise-linear tanh
// and sigmoid on a fixed-point value with SFU_FRAC fraction bits, the
// threshold rule of the quantiser and the two-operand pooling ops are this
// design's choices; normalization is not provided.
//
// Timing: 'start' (one cycle) latches op, operands and threshold. The units
// then process the vector in passes of as many lanes as there are units of
// that kind: one pass for ReLU, vPE and QU ops (>= M units), ceil(M/N_SPE)
// passes (2 at the defaults) for tanh and sigmoid. 'done' is high for one
// cycle when res and q hold the result, i.e. 1 + passes cycles after start.
module tim_sfu
  import tim_pkg::*;
#(
  parameter int unsigned M         = 32,
  parameter int unsigned N_RELU    = 64,
  parameter int unsigned N_VPE     = 8,
  parameter int unsigned VPE_LANES = 4,
  parameter int unsigned N_SPE     = 20,
  parameter int unsigned N_QU      = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  op_e                        op,
  input  logic [M-1:0][PSUM_W-1:0]   a,
  input  logic [M-1:0][PSUM_W-1:0]   b,
  input  logic [6:0]                 thr,
  output logic                       busy,
  output logic                       done,
  output logic [M-1:0][PSUM_W-1:0]   res,
  output logic [M-1:0][1:0]          q
);
  localparam int unsigned SPE_PASSES = (M + N_SPE - 1) / N_SPE;
  localparam int unsigned PW         = (SPE_PASSES > 1) ? $clog2(SPE_PASSES) : 1;
  localparam psum_t ONE  = psum_t'(1 << SFU_FRAC);
  localparam psum_t HALF = psum_t'(1 << (SFU_FRAC - 1));

  initial begin
    assert (N_RELU >= M && N_VPE * VPE_LANES >= M && N_QU >= M)
      else $error("tim_sfu: ReLU, vPE and QU units must cover the M lanes in one pass");
  end

  op_e                      op_q;
  logic [M-1:0][PSUM_W-1:0] a_q, b_q;
  logic [6:0]               thr_q;
  logic [PW-1:0]            pass;

  function automatic psum_t f_tanh(input psum_t x);
    if (x > ONE)       return ONE;
    else if (x < -ONE) return -ONE;
    else               return x;
  endfunction

  function automatic psum_t f_sigm(input psum_t x);
    psum_t y;
    y = (x >>> 2) + HALF;
    if (y > ONE)       return ONE;
    else if (y < 0)    return '0;
    else               return y;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      pass  <= '0;
      op_q  <= OP_HALT;
      thr_q <= '0;
      res   <= '0;
      q     <= '0;
      a_q   <= '0;
      b_q   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        pass  <= '0;
        op_q  <= op;
        a_q   <= a;
        b_q   <= b;
        thr_q <= thr;
      end else if (busy) begin
        unique case (op_q)
          OP_TANH, OP_SIGM: begin
            // N_SPE special-function PEs, one pass of lanes at a time
            for (int u = 0; u < int'(N_SPE); u++) begin
              int lane;
              lane = int'(pass) * int'(N_SPE) + u;
              if (lane < int'(M)) begin
                res[lane] <= (op_q == OP_TANH) ? f_tanh(psum_t'(a_q[lane]))
                                               : f_sigm(psum_t'(a_q[lane]));
              end
            end
            if (int'(pass) == int'(SPE_PASSES) - 1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              pass <= pass + 1'b1;
            end
          end
          default: begin
            for (int p = 0; p < int'(M); p++) begin
              psum_t x, y;
              x = psum_t'(a_q[p]);
              y = psum_t'(b_q[p]);
              unique case (op_q)
                OP_RELU:  res[p] <= (x < 0) ? '0 : x;
                OP_MAX:   res[p] <= (x > y) ? x : y;
                OP_ADD:   res[p] <= x + y;
                OP_QUANT: begin
                  if (x > psum_t'(thr_q))       q[p] <= T_POS;
                  else if (x < -psum_t'(thr_q)) q[p] <= T_NEG;
                  else                          q[p] <= T_ZERO;
                end
                default:  res[p] <= x;
              endcase
            end
            busy <= 1'b0;
            done <= 1'b1;
          end
        endcase
      end
    end
  end
endmodule
