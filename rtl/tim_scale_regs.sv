// tim_scale_regs: scale factor registers R1..R4 of a TiM tile.
//
// R1 = W1 and R2 = W2 hold the weight scale factors and R3 = I1 and R4 = I2
// the input scale factors of the current layer; they are rewritten when the
// layer changes. Their use follows the paper; the register width (SF_W) and
// the reset value 1 (the unweighted {-1, 0, 1} system) are this design's
// choices. Write: we, addr (0..3 = R1..R4) and wdata at a clock edge; the
// new value is visible the next cycle.
module tim_scale_regs
  import tim_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [1:0]      addr,
  input  logic [SF_W-1:0] wdata,
  output logic [SF_W-1:0] w1,
  output logic [SF_W-1:0] w2,
  output logic [SF_W-1:0] i1,
  output logic [SF_W-1:0] i2
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w1 <= SF_W'(1); w2 <= SF_W'(1); i1 <= SF_W'(1); i2 <= SF_W'(1);
    end else if (we) begin
      unique case (addr)
        2'd0: w1 <= wdata;
        2'd1: w2 <= wdata;
        2'd2: i1 <= wdata;
        2'd3: i2 <= wdata;
      endcase
    end
  end
endmodule
