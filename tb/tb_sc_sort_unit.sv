// tb_sc_sort_unit: feeds the Sort Unit lists of random ids (lengths 1 to
// 64, with repeats) under random input gaps and output back-pressure and
// checks that each comes out in ascending id order, as the same multiset of
// (id, payload) pairs, with last only on the final element. A list of 100
// must come out as a sorted batch of 64 without last (overflow pulsing)
// and a sorted batch of 36 with last. A lone end marker must pass through.
// The sort of n elements must take no more than n + 2 cycles between the
// last input and the first output.
module tb_sc_sort_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready, busy, overflow;
  elem_t in_elem = '0, out_elem;
  sc_sort_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  elem_t got [$];
  int ovf = 0, t_last_in = 0, t_first_out = -1, cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) begin
    if (out_valid && out_ready) got.push_back(out_elem);
    if (overflow && rst_n) ovf++;
    if (out_valid && t_first_out < 0) t_first_out = cyc;
  end

  task automatic send(elem_t e);
    @(negedge clk);
    in_valid = 1; in_elem = e;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); t_last_in = cyc;
    @(negedge clk); in_valid = 0;
    if ($urandom_range(3) == 0) @(negedge clk);
  endtask

  task automatic run_list(int n);
    elem_t sent [$];
    for (int k = 0; k < n; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'($urandom_range(40));
      e.vec[0] = lane_t'(k);
      e.last = (k == n - 1);
      sent.push_back(e);
    end
    got.delete(); t_first_out = -1;
    foreach (sent[k]) send(sent[k]);
    while (got.size() < n) @(negedge clk);
    check(t_first_out - t_last_in <= n + 2, $sformatf("sort of %0d took %0d cycles", n, t_first_out - t_last_in));
    for (int k = 0; k < n; k++) begin
      automatic int hit = 0;
      if (k > 0) check(got[k-1].id <= got[k].id, $sformatf("order at %0d of %0d", k, n));
      check(got[k].last == (k == n - 1), "last flag");
      foreach (sent[j]) if (sent[j].id == got[k].id && sent[j].vec[0] == got[k].vec[0]) hit++;
      check(hit == 1, "element kept");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run_list(1);
    run_list(2);
    run_list(17);
    run_list(64);
    for (int r = 0; r < 5; r++) run_list(1 + $urandom_range(63));
    // 100 elements: batches of 64 and 36
    got.delete();
    for (int k = 0; k < 100; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'($urandom_range(1000)); e.last = (k == 99);
      send(e);
    end
    while (got.size() < 100) @(negedge clk);
    check(ovf == 1, $sformatf("overflow pulses %0d", ovf));
    for (int k = 1; k < 100; k++) if (k != 64) check(got[k-1].id <= got[k].id, "batch order");
    check(!got[63].last && got[99].last, "batch last flags");
    // lone end marker
    got.delete();
    begin
      automatic elem_t m = '0;
      m.last = 1; m.empty = 1;
      send(m);
    end
    while (got.size() < 1) @(negedge clk);
    check(got[0].empty && got[0].last, "marker passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
