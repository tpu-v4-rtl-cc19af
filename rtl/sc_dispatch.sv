// sc_dispatch: the SparseCore dispatch stage.
//
// Takes instructions in program order from the sequencer and starts the
// unit each one names, holding an instruction (stall) while that unit is
// still busy:
//   T_* ops   start the tiles in the mask once none of them is busy
//   DMA_IN, DMA_OUT start the DMA Unit's inbound or outbound engine
//   CONCAT    starts the Concat Unit with the mask
//   FENCE, HALT wait until every unit, tile and stream is idle
//   NOP       is taken at once
// Units named by consecutive instructions therefore run at the same time,
// which is how the program overlaps the cross-channel units with the tiles.
// The paper draws dispatch between the sequencer and every unit, with
// control arrows only; these issue rules are this design's choice. Starts
// are one-cycle pulses in the cycle the instruction is taken; stall counts
// the cycles an instruction waited.
module sc_dispatch
  import sc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  instr_t               instr,
  // unit state
  input  logic [NUM_TILES-1:0] tile_busy,
  input  logic                 dma_in_busy,
  input  logic                 dma_out_busy,
  input  logic                 concat_busy,
  input  logic                 stream_busy,   // sort, reduce or fork holds data
  // unit starts
  output logic [NUM_TILES-1:0] tile_start,
  output logic                 dma_in_start,
  output logic                 dma_out_start,
  output logic                 concat_start,
  output logic [31:0]          stalls
);

  logic all_idle, can_go;

  assign all_idle = (tile_busy == '0) && !dma_in_busy && !dma_out_busy &&
                    !concat_busy && !stream_busy;

  always_comb begin
    case (instr.op)
      OP_NOP:                  can_go = 1'b1;
      OP_FENCE, OP_HALT:       can_go = all_idle;
      OP_DMA_IN:               can_go = !dma_in_busy;
      OP_DMA_OUT:              can_go = !dma_out_busy;
      OP_CONCAT:               can_go = !concat_busy;
      OP_T_FETCH, OP_T_GATHER, OP_T_VPU, OP_T_FLUSH, OP_T_SCATTER, OP_T_EMIT:
                               can_go = (tile_busy & instr.mask) == '0;
      default:                 can_go = 1'b1;
    endcase
  end

  assign instr_ready   = instr_valid && can_go;
  assign tile_start    = (instr_ready && instr.op inside {OP_T_FETCH, OP_T_GATHER, OP_T_VPU,
                          OP_T_FLUSH, OP_T_SCATTER, OP_T_EMIT}) ? instr.mask : '0;
  assign dma_in_start  = instr_ready && instr.op == OP_DMA_IN;
  assign dma_out_start = instr_ready && instr.op == OP_DMA_OUT;
  assign concat_start  = instr_ready && instr.op == OP_CONCAT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stalls <= '0;
    else if (instr_valid && !can_go) stalls <= stalls + 32'd1;
  end

  // A tile is only started when it is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (tile_start & tile_busy) == '0);

endmodule
