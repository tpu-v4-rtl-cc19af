// sc_tile: one SparseCore compute tile.
//
// A tile holds a Fetch Unit, an scVPU, a Flush Unit, its Spmem bank and a
// list of the ids its last gather received, and owns one HBM channel, as in
// the paper's block diagram. It accepts one tile instruction at a time
// (instr_valid is taken only while the tile is idle, instr_ready = !busy)
// and runs it in the unit the opcode names:
//   T_FETCH, T_GATHER        -> Fetch Unit
//   T_VPU                    -> scVPU
//   T_FLUSH, T_SCATTER, T_EMIT -> Flush Unit
// Running one instruction at a time per tile is this design's choice; it
// lets the units share the bank ports and the HBM channel through simple
// multiplexers selected by which unit is busy. Order between instructions on
// one tile is therefore kept by hardware; order between tiles and the
// cross-channel units is kept by the program (FENCE).
module sc_tile
  import sc_pkg::*;
#(
  parameter int unsigned SPM_DEPTH       = SPM_WORDS,
  parameter int unsigned MAX_OUTSTANDING = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     instr_valid,
  output logic     instr_ready,
  input  instr_t   instr,
  output logic     busy,
  // from the Fork Unit
  input  logic     fork_valid,
  output logic     fork_ready,
  input  elem_t    fork_elem,
  // to the Concat Unit
  output logic     cat_valid,
  input  logic     cat_ready,
  output elem_t    cat_elem,
  // HBM channel
  output logic     hbm_req_valid,
  input  logic     hbm_req_ready,
  output hbm_req_t hbm_req,
  input  logic     hbm_rsp_valid,
  input  hbm_rsp_t hbm_rsp,
  // events
  output logic     limit_stall
);

  logic start, start_fetch, start_vpu, start_flush;
  logic fetch_busy, vpu_busy, flush_busy;

  assign busy        = fetch_busy || vpu_busy || flush_busy;
  assign instr_ready = !busy;
  assign start       = instr_valid && !busy;
  assign start_fetch = start && (instr.op == OP_T_FETCH || instr.op == OP_T_GATHER);
  assign start_vpu   = start && (instr.op == OP_T_VPU);
  assign start_flush = start && (instr.op == OP_T_FLUSH || instr.op == OP_T_SCATTER ||
                                 instr.op == OP_T_EMIT);

  // id list
  id_t              ids [ID_DEPTH];
  logic             id_we;
  logic [ID_AW-1:0] id_wa, id_ra;
  id_t              id_wd, id_rd;
  logic [15:0]      gather_count;

  always_ff @(posedge clk) if (id_we) ids[id_wa] <= id_wd;
  assign id_rd = ids[id_ra];

  // Spmem bank ports
  logic              we0, we1, re0, re1;
  logic [SPM_AW-1:0] wa0, wa1, ra0, ra1;
  vec_t              wd0, wd1, rd0, rd1;

  logic              f_we0, f_we1;
  logic [SPM_AW-1:0] f_wa0, f_wa1;
  vec_t              f_wd0, f_wd1;
  logic              v_re0, v_re1, v_we;
  logic [SPM_AW-1:0] v_ra0, v_ra1, v_wa;
  vec_t              v_wd;
  logic              l_re;
  logic [SPM_AW-1:0] l_ra;

  logic     f_hbm_valid, l_hbm_valid;
  hbm_req_t f_hbm_req, l_hbm_req;

  sc_fetch_unit #(.MAX_OUTSTANDING(MAX_OUTSTANDING)) u_fetch (
    .clk, .rst_n, .start(start_fetch), .instr, .busy(fetch_busy),
    .fork_valid, .fork_ready, .fork_elem,
    .hbm_req_valid(f_hbm_valid), .hbm_req_ready(hbm_req_ready && fetch_busy),
    .hbm_req(f_hbm_req), .hbm_rsp_valid, .hbm_rsp,
    .we0(f_we0), .wa0(f_wa0), .wd0(f_wd0), .we1(f_we1), .wa1(f_wa1), .wd1(f_wd1),
    .id_we, .id_wa, .id_wd, .count(gather_count), .limit_stall
  );

  sc_scvpu u_vpu (
    .clk, .rst_n, .start(start_vpu), .instr, .gather_count, .busy(vpu_busy),
    .re0(v_re0), .ra0(v_ra0), .rd0, .re1(v_re1), .ra1(v_ra1), .rd1,
    .we(v_we), .wa(v_wa), .wd(v_wd)
  );

  sc_flush_unit u_flush (
    .clk, .rst_n, .start(start_flush), .instr, .gather_count, .busy(flush_busy),
    .re(l_re), .ra(l_ra), .rd(rd0), .id_ra, .id_rd,
    .hbm_req_valid(l_hbm_valid), .hbm_req_ready(hbm_req_ready && flush_busy),
    .hbm_req(l_hbm_req),
    .out_valid(cat_valid), .out_ready(cat_ready), .out_elem(cat_elem)
  );

  // Only one unit is busy at a time, so the ports are plain multiplexers.
  assign we0 = f_we0 || v_we;
  assign wa0 = vpu_busy ? v_wa : f_wa0;
  assign wd0 = vpu_busy ? v_wd : f_wd0;
  assign we1 = f_we1;
  assign wa1 = f_wa1;
  assign wd1 = f_wd1;
  assign re0 = v_re0 || l_re;
  assign ra0 = vpu_busy ? v_ra0 : l_ra;
  assign re1 = v_re1;
  assign ra1 = v_ra1;

  assign hbm_req_valid = (f_hbm_valid && fetch_busy) || (l_hbm_valid && flush_busy);
  assign hbm_req       = flush_busy ? l_hbm_req : f_hbm_req;

  sc_spmem_bank #(.WORDS(SPM_DEPTH), .AW(SPM_AW)) u_spmem (
    .clk, .we0, .wa0, .wd0, .we1, .wa1, .wd1,
    .re0, .ra0, .rd0, .re1, .ra1, .rd1
  );

  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({fetch_busy, vpu_busy, flush_busy}));

endmodule
