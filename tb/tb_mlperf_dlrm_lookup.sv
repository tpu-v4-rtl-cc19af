// tb_mlperf_dlrm_lookup: the embedding lookup of one training step of an
// MLPerf-DLRM-shaped workload on one SparseCore at default sizes.
//
// Shape: 26 univalent categorical features and 128 examples per
// SparseCore, i.e. 3328 ids per step. Each feature has its own table of
// 1000 rows (the table size is a test choice), laid out as one id space
// id = feature*1000 + row, row-sharded over the 16 tiles. Ids are drawn
// with a skew (the minimum of two uniform draws) so popular rows repeat.
// The ids arrive on ICI example by example and are looked up in 52 batches
// of 64, one batch per DMA_IN / T_GATHER / CONCAT / T_EMIT / DMA_OUT group,
// 26 groups per program. For every batch the test checks that exactly the
// distinct ids of the batch come back, each with its table row. It reports
// the cycle count of the step and the number of duplicates removed.
module tb_mlperf_dlrm_lookup;
  import sc_pkg::*;

  localparam int unsigned FEATURES = 26;
  localparam int unsigned BATCH    = 128;
  localparam int unsigned VOCAB    = 1000;
  localparam int unsigned ROWS     = 2048;
  localparam int unsigned GROUP    = 64;
  localparam int unsigned NIDS     = FEATURES * BATCH;
  localparam int unsigned NGROUPS  = NIDS / GROUP;

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
    hbm_model #(.DEPTH(ROWS), .LAT(40), .READY_PCT(90)) u_hbm (
      .clk, .rst_n, .req_valid(hbm_req_valid[t]), .req_ready(hbm_req_ready[t]),
      .req(hbm_req[t]), .rsp_valid(hbm_rsp_valid[t]), .rsp(hbm_rsp[t]));
    initial begin
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) u_hbm.mem[r][l] = lane_t'((r * 16 + t) * 8 + l + 1);
    end
  end

  function automatic vec_t row_of(int id);
    vec_t v;
    for (int l = 0; l < LANES; l++) v[l] = lane_t'(id * 8 + l + 1);
    return v;
  endfunction

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ICI input: one element per cycle when the SparseCore takes it
  elem_t in_q [$];
  always @(negedge clk) begin
    ici_in_valid = (in_q.size() != 0);
    if (in_q.size() != 0) ici_in_elem = in_q[0];
  end
  always @(posedge clk) if (ici_in_valid && ici_in_ready) void'(in_q.pop_front());

  // ICI output, split into batches at each last element
  elem_t got [$];
  int    group_done = 0;
  elem_t res [NGROUPS][$];
  assign ici_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && ici_out_valid) begin
    if (!ici_out_elem.empty) res[group_done].push_back(ici_out_elem);
    if (ici_out_elem.last) group_done++;
  end

  function automatic instr_t mk(opcode_e op, int spa = 0, int spb = 0, int len = 0);
    instr_t i = '0;
    i.op = op; i.mask = '1; i.spa = 16'(spa); i.spb = 16'(spb); i.len = 16'(len);
    return i;
  endfunction

  int ids [NIDS];
  int t0, t1;

  initial begin
    for (int e = 0; e < BATCH; e++)
      for (int f = 0; f < FEATURES; f++) begin
        automatic int a = $urandom_range(VOCAB - 1), b = $urandom_range(VOCAB - 1);
        automatic elem_t x = '0;
        ids[e * FEATURES + f] = f * VOCAB + ((a < b) ? a : b) / 4;
        x.id = id_t'(ids[e * FEATURES + f]);
        in_q.push_back(x);
      end
    repeat (4) @(posedge clk); rst_n = 1'b1; repeat (4) @(posedge clk);
    t0 = $time;
    for (int p = 0; p < 2; p++) begin
      automatic int k = 0;
      for (int g = 0; g < NGROUPS / 2; g++) begin
        instr_t prog [5];
        prog = '{mk(OP_DMA_IN, .len(GROUP)), mk(OP_T_GATHER, .spa(0), .spb(512)),
                 mk(OP_DMA_OUT), mk(OP_CONCAT), mk(OP_T_EMIT, .spa(0))};
        foreach (prog[j]) begin
          @(negedge clk); imem_we = 1'b1; imem_addr = 8'(k); imem_wdata = prog[j]; k++;
        end
      end
      @(negedge clk); imem_addr = 8'(k); imem_wdata = mk(OP_HALT);
      @(negedge clk); imem_we = 1'b0; start = 1'b1;
      @(negedge clk); start = 1'b0;
      while (!done) @(negedge clk);
    end
    t1 = $time;
    check(group_done == NGROUPS, $sformatf("%0d of %0d batches returned", group_done, NGROUPS));
    for (int g = 0; g < NGROUPS; g++) begin
      automatic int want [int];
      automatic int seen [int];
      for (int j = 0; j < GROUP; j++) want[ids[g * GROUP + j]] = 1;
      check(res[g].size() == want.num(), $sformatf("batch %0d: %0d rows for %0d distinct ids",
                                                   g, res[g].size(), want.num()));
      foreach (res[g][j]) begin
        automatic int id = int'(res[g][j].id);
        check(want.exists(id) && !seen.exists(id), $sformatf("batch %0d: id %0d", g, id));
        check(res[g][j].vec == row_of(id), $sformatf("batch %0d: row of id %0d", g, id));
        seen[id] = 1;
      end
    end
    check(dedup_merges > 0, "duplicates were merged");
    $display("step of %0d ids: %0d cycles, %0d duplicates merged, %0d dispatch stalls",
             NIDS, (t1 - t0) / 10, dedup_merges, dispatch_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
