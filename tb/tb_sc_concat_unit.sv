// tb_sc_concat_unit: sixteen tile-side sources, each with its own random
// number of elements (some none, ending in an end marker) and random
// valid gaps, feed the Concat Unit under random output back-pressure. The
// joined stream must hold every data element of the masked tiles exactly
// once and in each tile's order, carry last only on its final element, and
// the unit must go idle. Tiles outside the mask must not be drained.
module tb_sc_concat_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, out_valid, out_ready, busy;
  logic [NUM_TILES-1:0] mask = '0, in_valid, in_ready;
  elem_t in_elem [NUM_TILES];
  elem_t out_elem;
  sc_concat_unit dut (.*);

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

  elem_t src [NUM_TILES][$];
  logic  gap [NUM_TILES];
  elem_t got [$];
  always @(negedge clk) begin
    out_ready = ($urandom_range(3) != 0);
    for (int t = 0; t < NUM_TILES; t++) begin
      gap[t] = ($urandom_range(3) == 0);
      in_valid[t] = (src[t].size() != 0) && !gap[t];
      in_elem[t] = (src[t].size() != 0) ? src[t][0] : '0;
    end
  end
  always @(posedge clk) begin
    for (int t = 0; t < NUM_TILES; t++) if (in_valid[t] && in_ready[t]) void'(src[t].pop_front());
    if (out_valid && out_ready) got.push_back(out_elem);
  end

  task automatic run(logic [NUM_TILES-1:0] m);
    int n [NUM_TILES];
    int total = 0;
    got.delete();
    for (int t = 0; t < NUM_TILES; t++) begin
      n[t] = (t % 5 == 2) ? 0 : $urandom_range(12);
      src[t].delete();
      for (int k = 0; k < n[t]; k++) begin
        automatic elem_t e = '0;
        e.id = id_t'(t * 1000 + k); e.last = (k == n[t] - 1);
        src[t].push_back(e);
      end
      if (n[t] == 0) begin
        automatic elem_t e = '0;
        e.last = 1; e.empty = 1;
        src[t].push_back(e);
      end
      if (m[t]) total += n[t];
    end
    @(negedge clk); mask = m; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    begin
      automatic int nd = 0;
      foreach (got[k]) if (!got[k].empty) nd++;
      check(nd == total, $sformatf("joined %0d of %0d", nd, total));
    end
    for (int t = 0; t < NUM_TILES; t++) begin
      automatic int last_k = -1;
      foreach (got[k]) if (!got[k].empty && got[k].id / 1000 == t) begin
        check(m[t] && int'(got[k].id % 1000) == last_k + 1, $sformatf("tile %0d order", t));
        last_k = int'(got[k].id % 1000);
      end
      if (!m[t]) check(src[t].size() != 0, "unmasked tile left alone");
    end
    foreach (got[k]) check(got[k].last == (k == got.size() - 1), "single last at end");
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run('1);
    run(16'h00f3);
    run(16'h8000);
    run(16'h0004);   // one tile with no elements: the result is one end marker
    check(got.size() == 1 && got[0].empty && got[0].last, "empty concat gives a marker");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
