// sparsecore: one SparseCore (SC), the embedding engine of a TPU v4 chip
// (a chip has four).
//
// The SparseCore is a dataflow machine: a sequencer hands CISC-like
// instructions to a dispatch stage, which starts five cross-channel units
// and 16 compute tiles. Each tile has a Fetch Unit, an 8-wide scVPU, a
// Flush Unit, a bank of the shared Spmem and its own HBM channel. The
// cross-channel units form one stream path:
//
//   ICI in -> DMA -> Sort -> Sparse Reduce -> Fork -> tiles' Fetch Units
//   tiles' Flush Units -> Concat -> DMA -> ICI out
//
// The unit list, the tile contents, the counts (16 tiles, 8 lanes, 2.5 MiB
// Spmem) and the two data paths are the paper's. The instruction set, the
// stream format, row sharding by id mod 16 and all timing are this design's
// own. An embedding lookup is DMA_IN + T_GATHER (forward); a training update
// adds T_VPU (SGD) and T_SCATTER (backward); see the top-level test.
//
// Interface: the host writes the program through imem_*, then pulses start;
// done rises after HALT. ICI links and the ICI router are outside this
// block, so the DMA Unit's two streams are ports. Each tile's HBM channel is
// a port: a request valid/ready with write data and a tag, and a response
// valid (no back-pressure) that echoes the tag of a read. Event counters for
// the mechanisms are brought out for observation.
module sparsecore
  import sc_pkg::*;
#(
  parameter int unsigned SPM_DEPTH       = SPM_WORDS,
  parameter int unsigned SORT_DEPTH      = 64,
  parameter int unsigned MAX_OUTSTANDING = 16,
  parameter int unsigned IMEM_DEPTH      = 256,
  parameter int unsigned IAW             = $clog2(IMEM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host
  input  logic                 imem_we,
  input  logic [IAW-1:0]       imem_addr,
  input  instr_t               imem_wdata,
  input  logic                 start,
  output logic                 done,
  // ICI
  input  logic                 ici_in_valid,
  output logic                 ici_in_ready,
  input  elem_t                ici_in_elem,
  output logic                 ici_out_valid,
  input  logic                 ici_out_ready,
  output elem_t                ici_out_elem,
  // HBM channels, one per tile
  output logic [NUM_TILES-1:0] hbm_req_valid,
  input  logic [NUM_TILES-1:0] hbm_req_ready,
  output hbm_req_t             hbm_req [NUM_TILES],
  input  logic [NUM_TILES-1:0] hbm_rsp_valid,
  input  hbm_rsp_t             hbm_rsp [NUM_TILES],
  // observation
  output logic [31:0]          instr_count,
  output logic [31:0]          dispatch_stalls,
  output logic [31:0]          dedup_merges,
  output logic [31:0]          sort_overflows,
  output logic [31:0]          limit_stalls,
  output logic [15:0]          dma_out_count
);

  // sequencer -> dispatch
  logic   seq_valid, seq_ready;
  instr_t seq_instr;

  sc_sequencer #(.IMEM_DEPTH(IMEM_DEPTH), .IAW(IAW)) u_seq (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .start, .done,
    .instr_valid(seq_valid), .instr_ready(seq_ready), .instr(seq_instr),
    .issued(instr_count)
  );

  logic [NUM_TILES-1:0] tile_busy, tile_start;
  logic dma_in_busy, dma_out_busy, concat_busy;
  logic sort_busy, red_busy, fork_busy;
  logic dma_in_start, dma_out_start, concat_start;

  sc_dispatch u_dispatch (
    .clk, .rst_n,
    .instr_valid(seq_valid), .instr_ready(seq_ready), .instr(seq_instr),
    .tile_busy, .dma_in_busy, .dma_out_busy, .concat_busy,
    .stream_busy(sort_busy || red_busy || fork_busy),
    .tile_start, .dma_in_start, .dma_out_start, .concat_start,
    .stalls(dispatch_stalls)
  );

  // cross-channel stream path
  logic  d2s_valid, d2s_ready, s2r_valid, s2r_ready, r2f_valid, r2f_ready;
  elem_t d2s_elem, s2r_elem, r2f_elem;
  logic  c2d_valid, c2d_ready;
  elem_t c2d_elem;
  logic  sort_ovf, merge;

  sc_dma_unit u_dma (
    .clk, .rst_n, .start_in(dma_in_start), .start_out(dma_out_start),
    .len(seq_instr.len), .in_busy(dma_in_busy), .out_busy(dma_out_busy),
    .out_count(dma_out_count),
    .ici_in_valid, .ici_in_ready, .ici_in_elem,
    .ici_out_valid, .ici_out_ready, .ici_out_elem,
    .sort_valid(d2s_valid), .sort_ready(d2s_ready), .sort_elem(d2s_elem),
    .cat_valid(c2d_valid), .cat_ready(c2d_ready), .cat_elem(c2d_elem)
  );

  sc_sort_unit #(.SORT_DEPTH(SORT_DEPTH)) u_sort (
    .clk, .rst_n, .in_valid(d2s_valid), .in_ready(d2s_ready), .in_elem(d2s_elem),
    .out_valid(s2r_valid), .out_ready(s2r_ready), .out_elem(s2r_elem),
    .busy(sort_busy), .overflow(sort_ovf)
  );

  sc_sparse_reduce u_reduce (
    .clk, .rst_n, .in_valid(s2r_valid), .in_ready(s2r_ready), .in_elem(s2r_elem),
    .out_valid(r2f_valid), .out_ready(r2f_ready), .out_elem(r2f_elem),
    .busy(red_busy), .merge
  );

  logic [NUM_TILES-1:0] fork_valid, fork_ready;
  elem_t                fork_elem;

  sc_fork_unit u_fork (
    .clk, .rst_n, .in_valid(r2f_valid), .in_ready(r2f_ready), .in_elem(r2f_elem),
    .out_valid(fork_valid), .out_ready(fork_ready), .out_elem(fork_elem),
    .busy(fork_busy)
  );

  logic [NUM_TILES-1:0] cat_valid, cat_ready, lim;
  elem_t                cat_elem [NUM_TILES];

  sc_concat_unit u_concat (
    .clk, .rst_n, .start(concat_start), .mask(seq_instr.mask),
    .in_valid(cat_valid), .in_ready(cat_ready), .in_elem(cat_elem),
    .out_valid(c2d_valid), .out_ready(c2d_ready), .out_elem(c2d_elem),
    .busy(concat_busy)
  );

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    logic unused_ready;
    sc_tile #(.SPM_DEPTH(SPM_DEPTH), .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_tile (
      .clk, .rst_n,
      .instr_valid(tile_start[t]), .instr_ready(unused_ready), .instr(seq_instr),
      .busy(tile_busy[t]),
      .fork_valid(fork_valid[t]), .fork_ready(fork_ready[t]), .fork_elem,
      .cat_valid(cat_valid[t]), .cat_ready(cat_ready[t]), .cat_elem(cat_elem[t]),
      .hbm_req_valid(hbm_req_valid[t]), .hbm_req_ready(hbm_req_ready[t]),
      .hbm_req(hbm_req[t]), .hbm_rsp_valid(hbm_rsp_valid[t]), .hbm_rsp(hbm_rsp[t]),
      .limit_stall(lim[t])
    );
  end

  // event counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dedup_merges <= '0; sort_overflows <= '0; limit_stalls <= '0;
    end else begin
      if (merge)      dedup_merges   <= dedup_merges + 32'd1;
      if (sort_ovf)   sort_overflows <= sort_overflows + 32'd1;
      if (lim != '0)  limit_stalls   <= limit_stalls + 32'd1;
    end
  end

endmodule
