// tim_scheduler: instruction scheduler of a TiM bank.
//
// Runs the program held in the bank's instruction memory from address 0
// when 'start' is pulsed and pulses 'done' when it reaches HALT. Each
// instruction is fetched in one cycle (the memory read is synchronous) and
// executed in the next, unless it must wait:
//  * COMPUTE waits until every tile of the bank can accept an access
//    (rd_ready), then raises rd_en of the tiles in tmask, selects the
//    activation-buffer word, block, input-bit significance and I_alpha, and
//    latches where the results go (wb_*). Issuing in the last output cycle
//    of the previous access keeps the tiles in lock step and lets the array
//    work on access i+1 while the PCUs digitise access i.
//  * SETSF, the SFU operations and HALT wait until the tiles have drained.
//  * An SFU operation starts the SFU and waits for 'sfu_done'; in that
//    cycle the result is written to the psum buffer (psum_we) or, for QUANT,
//    to the activation buffer (act_we).
// 'stall' is high in every cycle an instruction waits for the tiles. The
// paper says only that the scheduler reads instructions and orchestrates
// the bank; the instruction set and this timing are this design's own.
module tim_scheduler
  import tim_pkg::*;
#(
  parameter int unsigned TILES      = 8,
  parameter int unsigned IMEM_DEPTH = 128,
  parameter int unsigned K          = 16,
  parameter int unsigned PADDR_W    = 7,
  parameter int unsigned AADDR_W    = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic                          stall,
  // instruction memory
  output logic [$clog2(IMEM_DEPTH)-1:0] imem_raddr,
  input  logic [INSTR_W-1:0]            imem_rdata,
  // tiles
  input  logic [TILES-1:0]              tile_ready,
  input  logic                          tiles_idle,
  output logic [TILES-1:0]              tile_rd_en,
  output logic [$clog2(K)-1:0]          tile_blk,
  output logic [ISB_W-1:0]              tile_isb,
  output logic                          tile_alpha,
  output logic [AADDR_W-1:0]            act_raddr,
  output logic [TILES-1:0]              sf_we,
  output logic [1:0]                    sf_addr,
  output logic [SF_W-1:0]               sf_wdata,
  // write-back of the access in flight
  output logic [TILES-1:0]              wb_mask,
  output logic                          wb_acc,
  output logic [PADDR_W-1:0]            wb_paddr,
  // SFU
  output logic                          sfu_start,
  output op_e                           sfu_op,
  output logic [PADDR_W-1:0]            sfu_paddr_a,
  output logic [PADDR_W-1:0]            sfu_paddr_b,
  output logic [6:0]                    sfu_thr,
  input  logic                          sfu_done,
  output logic                          psum_we,
  output logic [PADDR_W-1:0]            psum_waddr,
  output logic                          act_we,
  output logic [AADDR_W-2:0]            act_waddr
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_SFU} state_e;

  state_e state;
  logic [$clog2(IMEM_DEPTH)-1:0] pc;
  instr_t ins, ins_q;
  logic   go;

  assign ins        = instr_t'(imem_rdata);
  assign imem_raddr = pc;
  assign busy       = (state != S_IDLE);

  // issue conditions of the instruction in EXEC
  always_comb begin
    unique case (ins.op)
      OP_COMPUTE: go = &tile_ready;
      default:    go = tiles_idle;
    endcase
  end

  assign stall = (state == S_EXEC) && !go;

  // tile and SFU control, combinational from the instruction in EXEC
  always_comb begin
    tile_rd_en  = '0;
    sf_we       = '0;
    sfu_start   = 1'b0;
    tile_blk    = ins.blk[$clog2(K)-1:0];
    tile_isb    = ins.isb;
    tile_alpha  = ins.alpha;
    act_raddr   = ins.aaddr[AADDR_W-1:0];
    sf_addr     = ins.isb;
    sf_wdata    = ins.blk[SF_W-1:0];
    sfu_op      = (state == S_SFU) ? ins_q.op : ins.op;
    sfu_paddr_a = (state == S_SFU) ? ins_q.paddr[PADDR_W-1:0]  : ins.paddr[PADDR_W-1:0];
    sfu_paddr_b = (state == S_SFU) ? ins_q.paddr2[PADDR_W-1:0] : ins.paddr2[PADDR_W-1:0];
    sfu_thr     = (state == S_SFU) ? ins_q.paddr2 : ins.paddr2;
    if (state == S_EXEC && go) begin
      unique case (ins.op)
        OP_COMPUTE: tile_rd_en = ins.tmask[TILES-1:0];
        OP_SETSF:   sf_we      = ins.tmask[TILES-1:0];
        OP_RELU, OP_MAX, OP_ADD, OP_TANH, OP_SIGM, OP_QUANT: sfu_start = 1'b1;
        default: ;
      endcase
    end
    psum_we    = (state == S_SFU) && sfu_done && (ins_q.op != OP_QUANT);
    psum_waddr = ins_q.paddr2[PADDR_W-1:0];
    act_we     = (state == S_SFU) && sfu_done && (ins_q.op == OP_QUANT);
    act_waddr  = ins_q.aaddr[AADDR_W-2:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pc       <= '0;
      done     <= 1'b0;
      ins_q    <= '0;
      wb_mask  <= '0;
      wb_acc   <= 1'b0;
      wb_paddr <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_EXEC;
        S_EXEC: if (go) begin
          ins_q <= ins;
          unique case (ins.op)
            OP_HALT: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            OP_COMPUTE: begin
              wb_mask  <= ins.tmask[TILES-1:0];
              wb_acc   <= ins.acc;
              wb_paddr <= ins.paddr[PADDR_W-1:0];
              pc       <= pc + 1'b1;
              state    <= S_FETCH;
            end
            OP_SETSF: begin
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
            OP_RELU, OP_MAX, OP_ADD, OP_TANH, OP_SIGM, OP_QUANT: state <= S_SFU;
            default: begin  // unknown opcode: skip
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
          endcase
        end
        S_SFU: if (sfu_done) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
