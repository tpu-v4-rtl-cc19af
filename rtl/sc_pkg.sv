// sc_pkg: sizes, data types and the instruction encoding shared by every
// block of the SparseCore.
//
// A SparseCore has 16 compute tiles, each with an 8-wide SIMD vector unit and
// one bank of the 2.5 MiB sparse vector memory (Spmem). These three numbers
// follow the paper. Everything else here is this design's own choice: lanes
// are 32-bit two's-complement integers, one embedding row is one 8-lane
// Spmem word (32 bytes), so a bank holds 2.5 MiB / 16 / 32 B = 5120 rows,
// and the instruction word below is invented, since the paper only says the
// units execute CISC-like instructions on variable-length inputs.
package sc_pkg;

  localparam int unsigned NUM_TILES  = 16;   // compute tiles per SparseCore
  localparam int unsigned LANES      = 8;    // scVPU SIMD width
  localparam int unsigned DATA_W     = 32;   // bits per lane
  localparam int unsigned SPM_WORDS  = 5120; // rows per Spmem bank
  localparam int unsigned SPM_AW     = 13;   // Spmem bank address bits
  localparam int unsigned HBM_AW     = 32;   // HBM row address bits
  localparam int unsigned TAG_W      = 16;   // HBM request tag bits
  localparam int unsigned ID_DEPTH   = 256;  // ids a tile can hold per gather
  localparam int unsigned ID_AW      = 8;
  localparam int unsigned TILE_W     = $clog2(NUM_TILES);

  typedef logic signed [DATA_W-1:0] lane_t;
  typedef lane_t [LANES-1:0]        vec_t;
  typedef logic [31:0]              id_t;

  // One element of the cross-channel streams: a feature id with an
  // embedding row or gradient. An element with empty set carries no data and
  // only marks the end of a stream (it always has last set).
  typedef struct packed {
    id_t  id;
    vec_t vec;
    logic last;
    logic empty;
  } elem_t;

  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_HALT      = 4'd1,  // wait until every unit is idle, then stop
    OP_FENCE     = 4'd2,  // wait until every unit is idle
    OP_T_FETCH   = 4'd3,  // tiles: HBM[hbm+i] -> Spmem[spa+i], i < len
    OP_T_GATHER  = 4'd4,  // tiles: for each id from the Fork Unit, HBM row -> Spmem[spa+k], payload -> Spmem[spb+k]
    OP_T_VPU     = 4'd5,  // tiles: Spmem[spb..] <- f(Spmem[spa..], Spmem[hbm[15:0]..])
    OP_T_FLUSH   = 4'd6,  // tiles: Spmem[spa+i] -> HBM[hbm+i], i < len
    OP_T_SCATTER = 4'd7,  // tiles: Spmem[spa+k] -> HBM[hbm + id_k / NUM_TILES]
    OP_T_EMIT    = 4'd8,  // tiles: (id_k, Spmem[spa+k]) -> Concat Unit
    OP_DMA_IN    = 4'd9,  // DMA: take len elements from ICI into the Sort Unit
    OP_DMA_OUT   = 4'd10, // DMA: send the Concat Unit's stream out on ICI
    OP_CONCAT    = 4'd11  // Concat: join the EMIT streams of the tiles in mask
  } opcode_e;

  typedef enum logic [2:0] {
    VPU_ADD = 3'd0,  // d = a + b
    VPU_SUB = 3'd1,  // d = a - b
    VPU_MUL = 3'd2,  // d = a * b (low 32 bits)
    VPU_MAX = 3'd3,  // d = max(a, b)
    VPU_SGD = 3'd4   // d = a - (b >>> shift): SGD step, learning rate 2^-shift
  } vpu_op_e;

  // len == 0 in a tile instruction means "the number of ids the last
  // gather left in the tile".
  typedef struct packed {
    opcode_e               op;
    logic [NUM_TILES-1:0]  mask;   // tiles addressed by a tile instruction
    logic [HBM_AW-1:0]     hbm;    // HBM row address (T_VPU: hbm[15:0] is source b)
    logic [15:0]           spa;    // Spmem address a
    logic [15:0]           spb;    // Spmem address b (T_VPU: destination)
    logic [15:0]           len;    // number of rows / elements
    vpu_op_e               vop;    // scVPU operation
    logic [4:0]            shift;  // scVPU SGD shift
  } instr_t;

  typedef struct packed {
    logic              we;
    logic [HBM_AW-1:0] addr;
    vec_t              wdata;
    logic [TAG_W-1:0]  tag;
  } hbm_req_t;

  typedef struct packed {
    vec_t             rdata;
    logic [TAG_W-1:0] tag;
  } hbm_rsp_t;

  function automatic logic [TILE_W-1:0] owner_tile(id_t id);
    return id[TILE_W-1:0];            // row sharding: tile = id mod 16
  endfunction

  function automatic logic [HBM_AW-1:0] local_row(id_t id);
    return HBM_AW'(id >> TILE_W);     // row within the owning tile's table
  endfunction

endpackage
