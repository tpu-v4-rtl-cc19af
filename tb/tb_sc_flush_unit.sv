// tb_sc_flush_unit: the Flush Unit reads a Spmem model (synchronous read)
// and an id list set by this test. T_FLUSH must write rows spa+i to HBM
// hbm+i; T_SCATTER must write row spa+k to hbm + id_k/16; T_EMIT must send
// (id_k, row spa+k) in order with last only on the final element, under
// random back-pressure; T_EMIT with no ids must send one end marker. With
// no back-pressure an emit of n rows must take at most n+4 cycles.
module tb_sc_flush_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy;
  instr_t instr = '0;
  logic [15:0] gather_count = '0;
  logic re;
  logic [SPM_AW-1:0] ra;
  vec_t rd;
  logic [ID_AW-1:0] id_ra;
  id_t id_rd;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  hbm_req_t hbm_req;
  hbm_rsp_t hbm_rsp;
  logic out_valid, out_ready;
  elem_t out_elem;
  sc_flush_unit dut (.*);
  hbm_model #(.DEPTH(512), .LAT(4), .READY_PCT(60)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req(hbm_req),
    .rsp_valid(hbm_rsp_valid), .rsp(hbm_rsp));

  vec_t spm [1024];
  id_t ids [256];
  always_ff @(posedge clk) if (re) rd <= spm[ra[9:0]];
  assign id_rd = ids[id_ra];

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
  bit bp = 1;
  always @(negedge clk) out_ready = bp ? ($urandom_range(2) != 0) : 1'b1;
  always @(posedge clk) if (out_valid && out_ready) got.push_back(out_elem);

  task automatic go(opcode_e op, int hbm, int spa, int len, int gc);
    @(negedge clk);
    instr = '0; instr.op = op; instr.hbm = 32'(hbm); instr.spa = 16'(spa); instr.len = 16'(len);
    gather_count = 16'(gc);
    start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    int cyc;
    for (int r = 0; r < 1024; r++)
      for (int l = 0; l < LANES; l++) spm[r][l] = lane_t'(r * 16 + l);
    for (int k = 0; k < 256; k++) ids[k] = id_t'(k * 37 % 2048);
    for (int r = 0; r < 512; r++) u_hbm.mem[r] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    go(OP_T_FLUSH, 300, 40, 25, 0);
    for (int i = 0; i < 25; i++) check(u_hbm.mem[300 + i] == spm[40 + i], $sformatf("flush row %0d", i));
    go(OP_T_SCATTER, 100, 500, 0, 20);
    for (int k = 0; k < 20; k++) check(u_hbm.mem[100 + ids[k] / 16] == spm[500 + k], $sformatf("scatter %0d", k));
    got.delete();
    go(OP_T_EMIT, 0, 600, 0, 30);
    check(got.size() == 30, $sformatf("emit count %0d", got.size()));
    foreach (got[k]) begin
      check(got[k].id == ids[k] && got[k].vec == spm[600 + k] && !got[k].empty, $sformatf("emit %0d", k));
      check(got[k].last == (k == 29), $sformatf("emit last %0d", k));
    end
    got.delete();
    go(OP_T_EMIT, 0, 600, 0, 0);
    check(got.size() == 1 && got[0].empty && got[0].last, "emit marker when no ids");
    bp = 0; got.delete();
    @(negedge clk);
    instr = '0; instr.op = OP_T_EMIT; instr.spa = 16'd10; instr.len = 16'd40;
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    check(got.size() == 40, "emit 40 rows");
    check(cyc <= 44, $sformatf("emit of 40 rows took %0d cycles", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
