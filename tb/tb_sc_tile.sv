// tb_sc_tile: one compute tile on an HBM channel model. Runs, through the
// tile's instruction port, T_FETCH of 32 rows, T_VPU (multiply in place)
// and T_FLUSH to another HBM region, and checks the HBM rows; then a
// T_GATHER fed with ids and gradients, a T_VPU SGD step on the gathered
// rows (len 0: gather count), a T_SCATTER back to the table and a T_EMIT,
// checking the table rows and the emitted elements. Also checks that the
// tile refuses an instruction while busy.
module tb_sc_tile;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic instr_valid = 1'b0, instr_ready, busy;
  instr_t instr = '0;
  logic fork_valid = 1'b0, fork_ready;
  elem_t fork_elem = '0;
  logic cat_valid, cat_ready;
  elem_t cat_elem;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid, limit_stall;
  hbm_req_t hbm_req;
  hbm_rsp_t hbm_rsp;
  sc_tile dut (.*);
  hbm_model #(.DEPTH(512), .LAT(12), .READY_PCT(75)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req(hbm_req),
    .rsp_valid(hbm_rsp_valid), .rsp(hbm_rsp));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  elem_t got [$];
  always @(negedge clk) cat_ready = ($urandom_range(1) != 0);
  always @(posedge clk) if (cat_valid && cat_ready) got.push_back(cat_elem);

  task automatic issue(instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk); instr_valid = 0;
  endtask
  function automatic instr_t mk(opcode_e op, int hbm, int spa, int spb, int len, vpu_op_e vop, int sh);
    instr_t i = '0;
    i.op = op; i.mask = 16'h1; i.hbm = 32'(hbm); i.spa = 16'(spa); i.spb = 16'(spb);
    i.len = 16'(len); i.vop = vop; i.shift = 5'(sh);
    return i;
  endfunction

  vec_t ref_m [512];
  initial begin
    automatic int gid [$];
    automatic vec_t g [$];
    for (int r = 0; r < 512; r++) begin
      for (int l = 0; l < LANES; l++) ref_m[r][l] = lane_t'(r + l * 3 - 20);
      u_hbm.mem[r] = ref_m[r];
    end
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    issue(mk(OP_T_FETCH, 0, 0, 0, 32, VPU_ADD, 0));
    check(busy && !instr_ready, "tile busy refuses instruction");
    issue(mk(OP_T_VPU, 0, 0, 0, 32, VPU_MUL, 0));
    issue(mk(OP_T_FLUSH, 400, 0, 0, 32, VPU_ADD, 0));
    while (busy) @(negedge clk);
    for (int r = 0; r < 32; r++) begin
      vec_t e;
      for (int l = 0; l < LANES; l++) e[l] = ref_m[r][l] * ref_m[r][l];
      check(u_hbm.mem[400 + r] == e, $sformatf("fetch-mul-flush row %0d", r));
    end
    // gather / sgd / scatter / emit; ids owned by this tile: id % 16 == 0
    for (int k = 0; k < 20; k++) begin
      vec_t v;
      gid.push_back((k * 5 + 1) * 16);
      for (int l = 0; l < LANES; l++) v[l] = lane_t'($urandom_range(64)) - 32;
      g.push_back(v);
    end
    issue(mk(OP_T_GATHER, 100, 1000, 2000, 0, VPU_ADD, 0));
    for (int k = 0; k <= 20; k++) begin
      @(negedge clk);
      fork_valid = 1; fork_elem = '0;
      if (k < 20) begin fork_elem.id = id_t'(gid[k]); fork_elem.vec = g[k]; end
      else begin fork_elem.last = 1; fork_elem.empty = 1; end
      #1;
      while (!fork_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); fork_valid = 0;
    issue(mk(OP_T_VPU, 2000, 1000, 1000, 0, VPU_SGD, 1));
    issue(mk(OP_T_SCATTER, 100, 1000, 0, 0, VPU_ADD, 0));
    got.delete();
    issue(mk(OP_T_EMIT, 0, 1000, 0, 0, VPU_ADD, 0));
    while (busy) @(negedge clk);
    for (int k = 0; k < 20; k++) begin
      automatic int r = 100 + gid[k] / 16;
      for (int l = 0; l < LANES; l++) ref_m[r][l] = ref_m[r][l] - (g[k][l] >>> 1);
    end
    for (int r = 100; r < 200; r++) check(u_hbm.mem[r] == ref_m[r], $sformatf("table row %0d", r));
    check(got.size() == 20, $sformatf("emitted %0d", got.size()));
    foreach (got[k]) check(got[k].id == id_t'(gid[k]) && got[k].vec == ref_m[100 + gid[k] / 16],
                           $sformatf("emitted element %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
