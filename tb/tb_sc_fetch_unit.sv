// tb_sc_fetch_unit: drives the Fetch Unit against an HBM channel model
// (latency 30 plus up to 40 random cycles, so responses return out of
// order, and random back-pressure) and records its Spmem and id-list
// writes. A 48-row T_FETCH must land every row at spa+i, never exceed the
// outstanding limit (the unit's own assertion) and hit it at least once. A
// T_GATHER fed with a stream of ids and an end marker must fetch row
// hbm + id/16 for the k-th id into spa+k, store the payload at spb+k, keep
// the ids in order and leave the gather count. Both runs must have seen a
// response overtake an earlier one.
module tb_sc_fetch_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy;
  instr_t instr = '0;
  logic fork_valid = 1'b0, fork_ready;
  elem_t fork_elem = '0;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  hbm_req_t hbm_req;
  hbm_rsp_t hbm_rsp;
  logic we0, we1, id_we, limit_stall;
  logic [SPM_AW-1:0] wa0, wa1;
  vec_t wd0, wd1;
  logic [ID_AW-1:0] id_wa;
  id_t id_wd;
  logic [15:0] count;

  sc_fetch_unit dut (.*);
  hbm_model #(.DEPTH(256), .LAT(30), .READY_PCT(70), .JITTER(40)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req(hbm_req),
    .rsp_valid(hbm_rsp_valid), .rsp(hbm_rsp));

  vec_t spm [8192];
  id_t  ids [256];
  always_ff @(posedge clk) begin
    if (we1) spm[wa1] <= wd1;
    if (we0) spm[wa0] <= wd0;
    if (id_we) ids[id_wa] <= id_wd;
  end
  int limits = 0;
  always @(posedge clk) if (rst_n && limit_stall) limits++;
  // a response whose tag is below the previous one has overtaken it
  int overtakes = 0;
  int last_tag = 0;
  always @(posedge clk) begin
    if (start) last_tag = 0;
    else if (rst_n && hbm_rsp_valid) begin
      if (int'(hbm_rsp.tag) < last_tag) overtakes++;
      last_tag = int'(hbm_rsp.tag);
    end
  end

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

  function automatic vec_t row(int r);
    vec_t v;
    for (int l = 0; l < LANES; l++) v[l] = lane_t'(r * 100 + l);
    return v;
  endfunction

  initial begin
    automatic int gid [$];
    for (int r = 0; r < 256; r++) u_hbm.mem[r] = row(r);
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    // contiguous fetch
    @(negedge clk);
    instr = '0; instr.op = OP_T_FETCH; instr.hbm = 32'd10; instr.spa = 16'd100; instr.len = 16'd48;
    start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < 48; i++) check(spm[100 + i] == row(10 + i), $sformatf("fetch row %0d", i));
    check(limits > 0, "outstanding limit reached");
    check(overtakes > 0, "fetch saw out-of-order responses");
    overtakes = 0;
    // gather
    for (int k = 0; k < 30; k++) gid.push_back(int'($urandom_range(2000)));
    @(negedge clk);
    instr = '0; instr.op = OP_T_GATHER; instr.hbm = 32'd50; instr.spa = 16'd1000; instr.spb = 16'd2000;
    start = 1; @(negedge clk); start = 0;
    for (int k = 0; k <= 30; k++) begin
      fork_valid = 1;
      fork_elem = '0;
      if (k < 30) begin
        fork_elem.id = id_t'(gid[k]);
        for (int l = 0; l < LANES; l++) fork_elem.vec[l] = lane_t'(k * 7 + l);
      end else begin
        fork_elem.last = 1; fork_elem.empty = 1;
      end
      @(posedge clk);
      while (!fork_ready) @(posedge clk);
      @(negedge clk);
      fork_valid = 0;
      if ($urandom_range(1)) @(negedge clk);
    end
    while (busy) @(negedge clk);
    check(overtakes > 0, "gather saw out-of-order responses");
    check(count == 16'd30, $sformatf("gather count %0d", count));
    for (int k = 0; k < 30; k++) begin
      vec_t p;
      for (int l = 0; l < LANES; l++) p[l] = lane_t'(k * 7 + l);
      check(spm[1000 + k] == row(50 + gid[k] / 16), $sformatf("gathered row %0d", k));
      check(spm[2000 + k] == p, $sformatf("payload %0d", k));
      check(ids[k] == id_t'(gid[k]), $sformatf("id %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
