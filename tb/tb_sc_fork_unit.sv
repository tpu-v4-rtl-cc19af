// tb_sc_fork_unit: sends id streams through the Fork Unit with random
// per-tile back-pressure and checks that every data element reaches exactly
// the tile id mod 16, in order, without last, and that after the final
// element every one of the 16 tiles receives exactly one end marker. A
// stream that is only an end marker must also give every tile a marker.
module tb_sc_fork_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, busy;
  elem_t in_elem = '0, out_elem;
  logic [NUM_TILES-1:0] out_valid, out_ready;
  sc_fork_unit dut (.*);

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

  int got [NUM_TILES][$];
  int marks [NUM_TILES];
  always @(negedge clk) for (int t = 0; t < NUM_TILES; t++) out_ready[t] = ($urandom_range(2) != 0);
  always @(posedge clk) if (rst_n)
    for (int t = 0; t < NUM_TILES; t++)
      if (out_valid[t] && out_ready[t]) begin
        if (out_elem.empty) begin
          marks[t]++;
          if (!out_elem.last) begin failures++; $display("FAIL: marker without last"); end
        end else begin
          got[t].push_back(int'(out_elem.id));
          if (out_elem.last) begin failures++; $display("FAIL: data with last"); end
        end
      end

  task automatic send(elem_t e);
    @(negedge clk);
    in_valid = 1; in_elem = e;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic run(int n);
    int exp_q [NUM_TILES][$];
    for (int t = 0; t < NUM_TILES; t++) begin got[t].delete(); marks[t] = 0; end
    for (int k = 0; k < n; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'($urandom_range(5000));
      e.last = (k == n - 1);
      exp_q[e.id % NUM_TILES].push_back(int'(e.id));
      send(e);
    end
    if (n == 0) begin
      automatic elem_t m = '0;
      m.last = 1; m.empty = 1;
      send(m);
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int t = 0; t < NUM_TILES; t++) begin
      check(got[t] == exp_q[t], $sformatf("tile %0d elements", t));
      check(marks[t] == 1, $sformatf("tile %0d markers %0d", t, marks[t]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run(40);
    run(1);
    run(0);
    run(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
