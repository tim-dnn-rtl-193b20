// tim_pkg: types and constants shared by the TiM-DNN RTL.
//
// Ternary values travel as 2-bit codes that are also the read-wordline
// encoding of the Ternary Processing Cell: bit 0 drives WL_R1 and bit 1
// drives WL_R2, so +1 = 2'b01, -1 = 2'b10 and 0 = 2'b00 (2'b11 is unused and
// treated as 0). The default sizes are those of the evaluated 32-tile
// instance (L = K = 16, N = 256, M = 32, 12-bit partial sums, n_max = 8).
// The instruction format is this design's own: the paper names a scheduler
// and an instruction memory but gives no instruction set.
package tim_pkg;

  typedef enum logic [1:0] {
    T_ZERO = 2'b00,
    T_POS  = 2'b01,
    T_NEG  = 2'b10
  } tern_e;

  // Widths shared by the tile datapath
  localparam int unsigned ADC_W      = 4;    // bits to hold a count 0..n_max (8)
  localparam int unsigned PSUM_W     = 12;   // partial-sum width
  localparam int unsigned SF_W       = 4;    // scale-factor register width
  localparam int unsigned ISB_W      = 2;    // input-bit-significance (shift) width
  localparam int unsigned MV_W       = 10;   // bitline voltage in millivolts

  typedef logic signed [PSUM_W-1:0] psum_t;

  // Scheduler instruction set
  typedef enum logic [3:0] {
    OP_HALT    = 4'd0,
    OP_SETSF   = 4'd1,  // scale register isb[1:0] <- blk (4-bit value) in tiles of tmask
    OP_COMPUTE = 4'd2,  // one vector-matrix access of the tiles in tmask
    OP_RELU    = 4'd3,  // psum[paddr2] <- relu(psum[paddr])
    OP_MAX     = 4'd4,  // psum[paddr2] <- max(psum[paddr], psum[paddr2])
    OP_ADD     = 4'd5,  // psum[paddr2] <- psum[paddr] + psum[paddr2]
    OP_TANH    = 4'd6,  // psum[paddr2] <- hard-tanh(psum[paddr])
    OP_SIGM    = 4'd7,  // psum[paddr2] <- hard-sigmoid(psum[paddr])
    OP_QUANT   = 4'd8   // act entry aaddr[10:0] <- ternary(psum[paddr], threshold paddr2)
  } op_e;

  typedef struct packed {
    op_e         op;      // 47:44
    logic [7:0]  tmask;   // 43:36 tiles taking part
    logic [3:0]  blk;     // 35:32 block address (SETSF: value)
    logic [1:0]  isb;     // 31:30 input-bit significance (SETSF: register index)
    logic        alpha;   // 29    0: I_alpha = I1, 1: I_alpha = -I2
    logic        acc;     // 28    add the psum-buffer entry to the result
    logic [11:0] aaddr;   // 27:16 activation-buffer address
    logic [6:0]  paddr;   // 15:9  psum-buffer base / source address
    logic [6:0]  paddr2;  // 8:2   second psum address / threshold
    logic [1:0]  rsvd;    // 1:0
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // SFU fixed-point format for tanh/sigmoid: FRAC fraction bits
  localparam int unsigned SFU_FRAC = 4;

  // Bitline voltage (mV) after i cells discharged it, from SPICE (states S0..S10)
  function automatic logic [MV_W-1:0] bl_state_mv(input int unsigned i);
    case (i)
      0: return 10'd1000;  1: return 10'd890;  2: return 10'd780;
      3: return 10'd680;   4: return 10'd580;  5: return 10'd490;
      6: return 10'd400;   7: return 10'd320;  8: return 10'd240;
      9: return 10'd180;   default: return 10'd120;
    endcase
  endfunction

  // Integer value of a ternary code
  function automatic int tern_val(input logic [1:0] t);
    return (t == 2'b01) ? 1 : (t == 2'b10) ? -1 : 0;
  endfunction

endpackage
