// tb_sc_dispatch: offers instructions to the dispatch stage while the test
// sets the unit busy flags, and checks the issue rules cycle by cycle
// against a reference written here: each opcode starts only its own unit,
// tile instructions start exactly the masked tiles and wait while any of
// them is busy, FENCE and HALT wait for all units, NOP never waits, and the
// stall counter counts the waiting cycles.
module tb_sc_dispatch;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready;
  instr_t instr;
  logic [NUM_TILES-1:0] tile_busy, tile_start;
  logic dma_in_busy, dma_out_busy, concat_busy, stream_busy;
  logic dma_in_start, dma_out_start, concat_start;
  logic [31:0] stalls;
  sc_dispatch dut (.*);

  int checks = 0, failures = 0, exp_stalls = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  opcode_e ops [12] = '{OP_NOP, OP_HALT, OP_FENCE, OP_T_FETCH, OP_T_GATHER, OP_T_VPU,
                        OP_T_FLUSH, OP_T_SCATTER, OP_T_EMIT, OP_DMA_IN, OP_DMA_OUT, OP_CONCAT};

  initial begin
    instr_valid = 0; instr = '0; tile_busy = '0;
    dma_in_busy = 0; dma_out_busy = 0; concat_busy = 0; stream_busy = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int c = 0; c < 4000; c++) begin
      automatic bit go, is_t, idle;
      instr = '0;
      instr.op = ops[$urandom_range(11)];
      instr.mask = 16'($urandom) & 16'($urandom);
      instr_valid = $urandom_range(3) != 0;
      tile_busy = 16'($urandom) & 16'($urandom) & 16'($urandom);
      if ($urandom_range(2) == 0) tile_busy = '0;
      dma_in_busy = $urandom_range(3) == 0; dma_out_busy = $urandom_range(3) == 0;
      concat_busy = $urandom_range(3) == 0; stream_busy = $urandom_range(3) == 0;
      #1;
      is_t = instr.op inside {OP_T_FETCH, OP_T_GATHER, OP_T_VPU, OP_T_FLUSH, OP_T_SCATTER, OP_T_EMIT};
      idle = tile_busy == '0 && !dma_in_busy && !dma_out_busy && !concat_busy && !stream_busy;
      case (instr.op)
        OP_HALT, OP_FENCE: go = idle;
        OP_DMA_IN:  go = !dma_in_busy;
        OP_DMA_OUT: go = !dma_out_busy;
        OP_CONCAT:  go = !concat_busy;
        OP_NOP:     go = 1;
        default:    go = (tile_busy & instr.mask) == '0;
      endcase
      checks++;
      if (instr_ready !== (instr_valid && go) ||
          tile_start !== ((instr_valid && go && is_t) ? instr.mask : '0) ||
          dma_in_start !== (instr_valid && go && instr.op == OP_DMA_IN) ||
          dma_out_start !== (instr_valid && go && instr.op == OP_DMA_OUT) ||
          concat_start !== (instr_valid && go && instr.op == OP_CONCAT)) begin
        failures++;
        $display("FAIL cycle %0d op %0d", c, instr.op);
      end
      if (instr_valid && !go) exp_stalls++;
      @(negedge clk);
    end
    checks++;
    if (stalls != 32'(exp_stalls)) begin failures++; $display("FAIL stall count %0d vs %0d", stalls, exp_stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
