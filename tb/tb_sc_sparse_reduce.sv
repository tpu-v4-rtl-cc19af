// tb_sc_sparse_reduce: sends sorted streams with runs of equal ids through
// the Sparse Reduce Unit under random gaps and back-pressure and checks one
// output per distinct id, in order, whose vector is the lane-wise sum of the
// run, last only on the final output, and one merge pulse per folded
// element. Streams ending in a separate end marker and a lone marker are
// covered too.
module tb_sc_sparse_reduce;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready, busy, merge;
  elem_t in_elem = '0, out_elem;
  sc_sparse_reduce dut (.*);

  int checks = 0, failures = 0, merges = 0;
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
  always @(negedge clk) out_ready = ($urandom_range(2) != 0);
  always @(posedge clk) begin
    if (out_valid && out_ready) got.push_back(out_elem);
    if (merge) merges++;
  end

  task automatic send(elem_t e);
    @(negedge clk);
    in_valid = 1; in_elem = e;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk); in_valid = 0;
    if ($urandom_range(2) == 0) @(negedge clk);
  endtask

  task automatic run(int nids, bit marker);
    elem_t expq [$];
    int id = 0, total = 0, m0 = merges;
    got.delete();
    for (int u = 0; u < nids; u++) begin
      automatic int runlen = 1 + $urandom_range(3);
      automatic elem_t s = '0;
      id += 1 + $urandom_range(5);
      s.id = id_t'(id);
      for (int r = 0; r < runlen; r++) begin
        automatic elem_t e = '0;
        e.id = id_t'(id);
        for (int l = 0; l < LANES; l++) begin
          e.vec[l] = lane_t'($urandom_range(1000)) - 500;
          s.vec[l] = s.vec[l] + e.vec[l];
        end
        e.last = !marker && (u == nids - 1) && (r == runlen - 1);
        send(e);
        total++;
      end
      s.last = (u == nids - 1);
      expq.push_back(s);
    end
    if (marker) begin
      automatic elem_t mk = '0;
      mk.last = 1; mk.empty = 1;
      send(mk);
    end
    while (got.size() < nids) @(negedge clk);
    repeat (4) @(negedge clk);
    check(got.size() == nids, "output count");
    foreach (expq[k]) check(got[k] == expq[k], $sformatf("reduced element %0d", k));
    check(merges - m0 == total - nids, "merge pulses");
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run(1, 0);
    run(10, 0);
    run(25, 1);
    run(7, 1);
    got.delete();
    begin
      automatic elem_t mk = '0;
      mk.last = 1; mk.empty = 1;
      send(mk);
    end
    repeat (4) @(negedge clk);
    check(got.size() == 1 && got[0].empty && got[0].last, "lone marker");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
