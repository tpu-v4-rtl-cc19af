// tb_sc_sequencer: the host loads a 40-instruction program ending in HALT
// (and an instruction after it that must never be issued), then starts the
// sequencer. Under random dispatch back-pressure the test checks that the
// instructions come out in program order, each exactly once, that done
// rises after the HALT is taken, and the issue count; then restarts it.
module tb_sc_sequencer;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic imem_we = 1'b0, start = 1'b0, done, instr_valid, instr_ready;
  logic [7:0] imem_addr = '0;
  instr_t imem_wdata = '0, instr;
  logic [31:0] issued;
  sc_sequencer dut (.*);

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

  instr_t prog [42], got [$];
  always @(negedge clk) instr_ready = ($urandom_range(2) == 0);
  always @(posedge clk) if (instr_valid && instr_ready) got.push_back(instr);

  task automatic run();
    got.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(got.size() == 40, $sformatf("issued %0d", got.size()));
    check(issued == 32'd40, "issue count");
    foreach (got[k]) check(got[k] == prog[k], $sformatf("instruction %0d", k));
  endtask

  initial begin
    for (int k = 0; k < 42; k++) begin
      prog[k] = '0;
      prog[k].op = (k == 39) ? OP_HALT : ((k == 40) ? OP_T_FETCH : OP_NOP);
      prog[k].hbm = 32'($urandom); prog[k].len = 16'(k);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    check(!instr_valid && !done, "idle after reset");
    for (int k = 0; k < 42; k++) begin
      @(negedge clk); imem_we = 1; imem_addr = 8'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0;
    run();
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
