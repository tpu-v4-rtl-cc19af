// sc_flush_unit: a tile's Flush Unit, which writes updated parameters from
// Spmem back to HBM and sends rows out of the tile to the Concat Unit.
//
// Three operations, started by a one-cycle start pulse:
//  T_FLUSH   Spmem[spa+i] -> HBM[hbm+i], i < len (contiguous write-back).
//  T_SCATTER Spmem[spa+k] -> HBM[hbm + id_k / NUM_TILES] for the k-th id of
//            the tile's id list (write-back of gathered rows).
//  T_EMIT    element (id_k, Spmem[spa+k]) -> Concat Unit, last on the final
//            one; with no ids it sends one end-of-stream marker.
// For T_SCATTER and T_EMIT the count is len, or the gather count if len = 0.
// The paper names the unit and says it writes updated parameters during the
// backward pass; T_EMIT comes from the figure's data path from the Flush
// Units to the Concat Unit. Spmem is read one cycle ahead into a two-entry
// queue, so with no back-pressure one row leaves per cycle.
module sc_flush_unit
  import sc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  input  logic [15:0]       gather_count,
  output logic              busy,
  // Spmem read port
  output logic              re,
  output logic [SPM_AW-1:0] ra,
  input  vec_t              rd,
  // id list (combinational read)
  output logic [ID_AW-1:0]  id_ra,
  input  id_t               id_rd,
  // HBM channel (writes only)
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output hbm_req_t          hbm_req,
  // Concat Unit stream
  output logic              out_valid,
  input  logic              out_ready,
  output elem_t             out_elem
);

  typedef enum logic [1:0] {M_FLUSH, M_SCATTER, M_EMIT} mode_e;

  logic              active, pend, marker_sent;
  mode_e             mode;
  logic [15:0]       i, n, spa_q, pend_i;
  logic [HBM_AW-1:0] hbm_q;
  // two-entry queue of rows read from Spmem
  vec_t              q_vec [2];
  logic [15:0]       q_idx [2];
  logic [1:0]        q_cnt;
  logic              q_rp, q_wp;
  logic              head_v, fire, issue, marker;

  assign head_v = q_cnt != 2'd0;
  assign marker = active && mode == M_EMIT && n == '0 && !marker_sent;
  assign fire   = (mode == M_EMIT) ? (out_valid && out_ready)
                                   : (hbm_req_valid && hbm_req_ready);
  assign issue  = active && (i < n) &&
                  ((2'(q_cnt) + 2'(pend) - 2'(fire && head_v)) < 2'd2);

  assign re = issue;
  assign ra = SPM_AW'(spa_q + i);

  assign id_ra = ID_AW'(q_idx[q_rp]);

  always_comb begin
    hbm_req       = '0;
    hbm_req.we    = 1'b1;
    hbm_req.wdata = q_vec[q_rp];
    hbm_req.addr  = (mode == M_SCATTER) ? hbm_q + local_row(id_rd)
                                        : hbm_q + HBM_AW'(q_idx[q_rp]);
    hbm_req.tag   = TAG_W'(q_idx[q_rp]);
  end
  assign hbm_req_valid = head_v && mode != M_EMIT;

  always_comb begin
    out_elem       = '0;
    out_elem.id    = id_rd;
    out_elem.vec   = q_vec[q_rp];
    out_elem.last  = marker || (q_idx[q_rp] == n - 16'd1);
    out_elem.empty = marker;
  end
  assign out_valid = (head_v && mode == M_EMIT) || marker;

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; pend <= 1'b0; marker_sent <= 1'b0; mode <= M_FLUSH;
      i <= '0; n <= '0; spa_q <= '0; pend_i <= '0; hbm_q <= '0;
      q_cnt <= '0; q_rp <= 1'b0; q_wp <= 1'b0;
      q_vec[0] <= '0; q_vec[1] <= '0; q_idx[0] <= '0; q_idx[1] <= '0;
    end else begin
      pend   <= issue;
      pend_i <= i;
      if (pend) begin
        q_vec[q_wp] <= rd;
        q_idx[q_wp] <= pend_i;
        q_wp        <= ~q_wp;
      end
      if (fire && head_v) q_rp <= ~q_rp;
      q_cnt <= q_cnt + 2'(pend) - 2'(fire && head_v);
      if (start) begin
        active      <= 1'b1;
        marker_sent <= 1'b0;
        i           <= '0;
        spa_q       <= instr.spa;
        hbm_q       <= instr.hbm;
        case (instr.op)
          OP_T_SCATTER: mode <= M_SCATTER;
          OP_T_EMIT:    mode <= M_EMIT;
          default:      mode <= M_FLUSH;
        endcase
        n <= (instr.len == '0 && instr.op != OP_T_FLUSH) ? gather_count : instr.len;
      end else if (active) begin
        if (issue) i <= i + 16'd1;
        if (marker && out_ready) marker_sent <= 1'b1;
        if (i == n && !pend && q_cnt == '0 && !issue && !marker) active <= 1'b0;
      end
    end
  end

endmodule
