// tb_sc_dma_unit: DMA_IN with lengths 1, 7 and 30 must pass exactly that
// many ICI elements to the Sort side, ids and vectors unchanged, last only
// on the len-th and empty never set, and leave the rest on the ICI input;
// DMA_IN with length 0 must send one end marker. DMA_OUT must pass the
// Concat stream to ICI up to its last element and count the data elements.
// Random back-pressure on both sides.
module tb_sc_dma_unit;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start_in = 1'b0, start_out = 1'b0, in_busy, out_busy;
  logic [15:0] len = '0, out_count;
  logic ici_in_valid, ici_in_ready, ici_out_valid, ici_out_ready;
  elem_t ici_in_elem, ici_out_elem;
  logic sort_valid, sort_ready, cat_valid, cat_ready;
  elem_t sort_elem, cat_elem;
  sc_dma_unit dut (.*);

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

  elem_t iq [$], cq [$], sgot [$], igot [$];
  always @(negedge clk) begin
    sort_ready = ($urandom_range(2) != 0);
    ici_out_ready = ($urandom_range(2) != 0);
    ici_in_valid = iq.size() != 0 && $urandom_range(3) != 0;
    ici_in_elem = iq.size() != 0 ? iq[0] : '0;
    cat_valid = cq.size() != 0 && $urandom_range(3) != 0;
    cat_elem = cq.size() != 0 ? cq[0] : '0;
  end
  always @(posedge clk) begin
    if (ici_in_valid && ici_in_ready) void'(iq.pop_front());
    if (cat_valid && cat_ready) void'(cq.pop_front());
    if (sort_valid && sort_ready) sgot.push_back(sort_elem);
    if (ici_out_valid && ici_out_ready) igot.push_back(ici_out_elem);
  end

  task automatic dma_in(int n);
    elem_t sent [$];
    sgot.delete();
    sent = iq[0:n-1];
    @(negedge clk); len = 16'(n); start_in = 1;
    @(negedge clk); start_in = 0;
    while (in_busy) @(negedge clk);
    check(sgot.size() == (n == 0 ? 1 : n), $sformatf("dma in %0d: %0d out", n, sgot.size()));
    if (n == 0) check(sgot[0].empty && sgot[0].last, "zero-length marker");
    else foreach (sgot[k])
      check(sgot[k].id == sent[k].id && sgot[k].vec == sent[k].vec && !sgot[k].empty &&
            sgot[k].last == (k == n - 1), $sformatf("dma in element %0d", k));
  endtask

  initial begin
    ici_in_valid = 0; cat_valid = 0;
    for (int k = 0; k < 60; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'(k + 100); e.vec[3] = lane_t'(k * 11);
      e.last = (k % 5 == 0);        // ICI framing bits must be ignored
      iq.push_back(e);
    end
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    dma_in(1);
    dma_in(7);
    dma_in(0);
    dma_in(30);
    check(iq.size() == 22, $sformatf("left on ICI: %0d", iq.size()));
    // outbound
    for (int k = 0; k < 25; k++) begin
      automatic elem_t e = '0;
      e.id = id_t'(k); e.last = (k == 19);
      cq.push_back(e);
    end
    @(negedge clk); start_out = 1;
    @(negedge clk); start_out = 0;
    while (out_busy) @(negedge clk);
    check(igot.size() == 20, $sformatf("dma out sent %0d", igot.size()));
    check(out_count == 16'd20, "dma out count");
    foreach (igot[k]) check(igot[k].id == id_t'(k), "dma out order");
    check(cq.size() == 5, "stopped at last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
