// tb_sparsecore: end-to-end test of the SparseCore at its default sizes.
//
// Sixteen HBM channel models hold one embedding table, row-sharded by
// id mod 16 (row id of the table lives in tile id%16 at row id/16, with
// lane l = id*8 + l + 1). The host loads four programs in turn:
//  1. forward lookup: a random id list with repeats comes in on ICI, is
//     sorted, deduplicated, forked to the owning tiles, gathered from HBM and
//     sent back out on ICI; the test checks one element per distinct id
//     holding that id's table row;
//  2. training update: (id, gradient) pairs with repeats come in; each
//     distinct row is gathered, updated in place by the scVPU's SGD step
//     (w - sum(g) >>> 2) and scattered back; the test checks every HBM row;
//  3. a lookup of 100 distinct ids, more than the Sort Unit holds, so it
//     sorts in batches (overflow);
//  4. a contiguous fetch of 64 rows into one tile, which runs into the
//     outstanding-read limit, then an scVPU add and a contiguous flush.
// Expected values come from plain arrays kept by the test. HBM and ICI
// apply random back-pressure. The test also requires that dispatch stalls,
// duplicate merges, sort overflow and the outstanding limit each happened.
module tb_sparsecore;
  import sc_pkg::*;

  localparam int unsigned ROWS = 1024;
  localparam int unsigned NID  = 300;   // table ids 0 .. NID-1

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       imem_we = 1'b0;
  logic [7:0] imem_addr = '0;
  instr_t     imem_wdata = '0;
  logic       start = 1'b0, done;
  logic       ici_in_valid = 1'b0, ici_in_ready;
  elem_t      ici_in_elem = '0;
  logic       ici_out_valid, ici_out_ready;
  elem_t      ici_out_elem;
  logic [NUM_TILES-1:0] hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  hbm_req_t   hbm_req [NUM_TILES];
  hbm_rsp_t   hbm_rsp [NUM_TILES];
  logic [31:0] instr_count, dispatch_stalls, dedup_merges, sort_overflows, limit_stalls;
  logic [15:0] dma_out_count;

  sparsecore dut (.*);

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_hbm
    hbm_model #(.DEPTH(ROWS), .LAT(40), .READY_PCT(80)) u_hbm (
      .clk, .rst_n, .req_valid(hbm_req_valid[t]), .req_ready(hbm_req_ready[t]),
      .req(hbm_req[t]), .rsp_valid(hbm_rsp_valid[t]), .rsp(hbm_rsp[t]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference copy of every HBM channel
  vec_t ref_mem [NUM_TILES][ROWS];

  function automatic vec_t row_init(int id);
    vec_t v;
    for (int l = 0; l < LANES; l++) v[l] = lane_t'(id * 8 + l + 1);
    return v;
  endfunction

  // HBM contents are set through the models' arrays
  task automatic hbm_write(int t, int r, vec_t v);
    case (t)
      0: g_hbm[0].u_hbm.mem[r] = v;   1: g_hbm[1].u_hbm.mem[r] = v;
      2: g_hbm[2].u_hbm.mem[r] = v;   3: g_hbm[3].u_hbm.mem[r] = v;
      4: g_hbm[4].u_hbm.mem[r] = v;   5: g_hbm[5].u_hbm.mem[r] = v;
      6: g_hbm[6].u_hbm.mem[r] = v;   7: g_hbm[7].u_hbm.mem[r] = v;
      8: g_hbm[8].u_hbm.mem[r] = v;   9: g_hbm[9].u_hbm.mem[r] = v;
      10: g_hbm[10].u_hbm.mem[r] = v; 11: g_hbm[11].u_hbm.mem[r] = v;
      12: g_hbm[12].u_hbm.mem[r] = v; 13: g_hbm[13].u_hbm.mem[r] = v;
      14: g_hbm[14].u_hbm.mem[r] = v; default: g_hbm[15].u_hbm.mem[r] = v;
    endcase
  endtask
  function automatic vec_t hbm_read(int t, int r);
    case (t)
      0: return g_hbm[0].u_hbm.mem[r];   1: return g_hbm[1].u_hbm.mem[r];
      2: return g_hbm[2].u_hbm.mem[r];   3: return g_hbm[3].u_hbm.mem[r];
      4: return g_hbm[4].u_hbm.mem[r];   5: return g_hbm[5].u_hbm.mem[r];
      6: return g_hbm[6].u_hbm.mem[r];   7: return g_hbm[7].u_hbm.mem[r];
      8: return g_hbm[8].u_hbm.mem[r];   9: return g_hbm[9].u_hbm.mem[r];
      10: return g_hbm[10].u_hbm.mem[r]; 11: return g_hbm[11].u_hbm.mem[r];
      12: return g_hbm[12].u_hbm.mem[r]; 13: return g_hbm[13].u_hbm.mem[r];
      14: return g_hbm[14].u_hbm.mem[r]; default: return g_hbm[15].u_hbm.mem[r];
    endcase
  endfunction

  function automatic instr_t mk(opcode_e op, logic [15:0] mask = 16'hffff,
                                int hbm = 0, int spa = 0, int spb = 0, int len = 0,
                                vpu_op_e vop = VPU_ADD, int shift = 0);
    instr_t i;
    i = '0;
    i.op = op; i.mask = mask; i.hbm = HBM_AW'(hbm); i.spa = 16'(spa);
    i.spb = 16'(spb); i.len = 16'(len); i.vop = vop; i.shift = 5'(shift);
    return i;
  endfunction

  instr_t prog [$];
  elem_t  in_q [$];
  elem_t  got  [$];

  task automatic run_program();
    foreach (prog[k]) begin
      @(negedge clk);
      imem_we = 1'b1; imem_addr = 8'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    got.delete();
    while (!done) begin
      @(negedge clk);
    end
    prog.delete();
  endtask

  // ICI input driver
  always @(negedge clk) begin
    if (ici_in_valid && ici_in_ready_q) void'(in_q.pop_front());
    ici_in_valid = (in_q.size() != 0);
    if (in_q.size() != 0) ici_in_elem = in_q[0];
  end
  logic ici_in_ready_q;
  always @(posedge clk) ici_in_ready_q <= ici_in_ready;

  // ICI output collector with random back-pressure
  always @(posedge clk) begin
    if (ici_out_valid && ici_out_ready && !ici_out_elem.empty) got.push_back(ici_out_elem);
  end
  always @(negedge clk) ici_out_ready = ($urandom_range(3) != 0);

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ids [$];
  int cnt [int];
  vec_t gsum [int];

  initial begin
    for (int t = 0; t < NUM_TILES; t++)
      for (int r = 0; r < ROWS; r++) begin
        ref_mem[t][r] = (r * 16 + t < NID) ? row_init(r * 16 + t) : '0;
        hbm_write(t, r, ref_mem[t][r]);
      end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // ---- 1. forward lookup with repeated ids ----
    ids.delete(); cnt.delete();
    for (int k = 0; k < 48; k++) begin
      automatic int id = (k % 3 == 0 && k > 0) ? ids[$urandom_range(k - 1)] : int'($urandom_range(NID - 1));
      automatic elem_t e = '0;
      ids.push_back(id);
      cnt[id] = cnt.exists(id) ? cnt[id] + 1 : 1;
      e.id = id_t'(id);
      in_q.push_back(e);
    end
    prog.push_back(mk(OP_DMA_IN, .len(48)));
    prog.push_back(mk(OP_T_GATHER, .hbm(0), .spa(0), .spb(512)));
    prog.push_back(mk(OP_DMA_OUT));
    prog.push_back(mk(OP_CONCAT));
    prog.push_back(mk(OP_T_EMIT, .spa(0)));
    prog.push_back(mk(OP_HALT));
    run_program();
    check(got.size() == cnt.num(), $sformatf("lookup: %0d elements out, %0d distinct ids", got.size(), cnt.num()));
    check(dma_out_count == 16'(cnt.num()), "lookup: DMA out count");
    check(dedup_merges == 32'(48 - cnt.num()), $sformatf("lookup: %0d merges", dedup_merges));
    begin
      automatic int seen [int];
      foreach (got[k]) begin
        automatic int id = int'(got[k].id);
        check(cnt.exists(id) && !seen.exists(id), $sformatf("lookup: id %0d expected once", id));
        check(got[k].vec == row_init(id), $sformatf("lookup: row of id %0d", id));
        seen[id] = 1;
      end
    end

    // ---- 2. training update: gather, SGD, scatter ----
    cnt.delete(); gsum.delete();
    for (int k = 0; k < 40; k++) begin
      automatic int id = (k % 4 == 1) ? int'(in_q.size() == 0 ? 7 : 7) : int'($urandom_range(NID - 1));
      automatic elem_t e = '0;
      e.id = id_t'(id);
      for (int l = 0; l < LANES; l++) e.vec[l] = lane_t'($urandom_range(400)) - 200;
      if (!gsum.exists(id)) gsum[id] = '0;
      for (int l = 0; l < LANES; l++) gsum[id][l] = gsum[id][l] + e.vec[l];
      in_q.push_back(e);
    end
    foreach (gsum[id])
      for (int l = 0; l < LANES; l++)
        ref_mem[id % 16][id / 16][l] = ref_mem[id % 16][id / 16][l] - (gsum[id][l] >>> 2);
    prog.push_back(mk(OP_DMA_IN, .len(40)));
    prog.push_back(mk(OP_T_GATHER, .hbm(0), .spa(0), .spb(512)));
    prog.push_back(mk(OP_T_VPU, .hbm(512), .spa(0), .spb(0), .vop(VPU_SGD), .shift(2)));
    prog.push_back(mk(OP_T_SCATTER, .hbm(0), .spa(0)));
    prog.push_back(mk(OP_HALT));
    run_program();
    begin
      automatic int bad = 0;
      for (int t = 0; t < NUM_TILES; t++)
        for (int r = 0; r < 32; r++)
          if (hbm_read(t, r) != ref_mem[t][r]) begin
            bad++;
            if (bad < 5) $display("  row %0d of tile %0d differs", r, t);
          end
      check(bad == 0, $sformatf("update: %0d HBM rows wrong", bad));
    end

    // ---- 3. lookup longer than the Sort Unit: batches ----
    cnt.delete();
    for (int k = 0; k < 100; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'(k * 3 % NID);
      cnt[k * 3 % NID] = 1;
      in_q.push_back(e);
    end
    prog.push_back(mk(OP_DMA_IN, .len(100)));
    prog.push_back(mk(OP_T_GATHER, .hbm(0), .spa(1000), .spb(2000)));
    prog.push_back(mk(OP_DMA_OUT));
    prog.push_back(mk(OP_CONCAT));
    prog.push_back(mk(OP_T_EMIT, .spa(1000)));
    prog.push_back(mk(OP_HALT));
    run_program();
    check(got.size() == 100, $sformatf("batched lookup: %0d elements", got.size()));
    foreach (got[k]) begin
      automatic int id = int'(got[k].id);
      check(got[k].vec == ref_mem[id % 16][id / 16], $sformatf("batched lookup: row of id %0d", id));
    end
    check(sort_overflows >= 1, "sort overflow happened");

    // ---- 4. contiguous fetch, add, flush on tile 3 ----
    prog.push_back(mk(OP_T_FETCH, .mask(16'h0008), .hbm(0), .spa(3000), .len(64)));
    prog.push_back(mk(OP_T_VPU, .mask(16'h0008), .hbm(3000), .spa(3000), .spb(4000),
                      .len(64), .vop(VPU_ADD)));
    prog.push_back(mk(OP_T_FLUSH, .mask(16'h0008), .hbm(600), .spa(4000), .len(64)));
    prog.push_back(mk(OP_HALT));
    run_program();
    begin
      automatic int bad = 0;
      for (int r = 0; r < 64; r++) begin
        vec_t e;
        for (int l = 0; l < LANES; l++) e[l] = ref_mem[3][r][l] * 2;
        if (hbm_read(3, 600 + r) != e) bad++;
      end
      check(bad == 0, $sformatf("fetch/add/flush: %0d rows wrong", bad));
    end

    // mechanisms
    $display("instructions=%0d stalls=%0d merges=%0d overflows=%0d limit_stalls=%0d",
             instr_count, dispatch_stalls, dedup_merges, sort_overflows, limit_stalls);
    check(dispatch_stalls > 0, "dispatch stall happened");
    check(dedup_merges > 0, "duplicate merge happened");
    check(sort_overflows > 0, "sort overflow happened");
    check(limit_stalls > 0, "outstanding-read limit reached");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
