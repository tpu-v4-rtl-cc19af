// tb_sc_spmem_bank: random traffic on both write ports and both read ports
// of one Spmem bank at its default size, checked against a reference array.
// Covers same-row writes on both ports (port 0 must win) and read-old-data
// when a read and a write hit one row in the same cycle.
module tb_sc_spmem_bank;
  import sc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we0, we1, re0, re1;
  logic [SPM_AW-1:0] wa0, wa1, ra0, ra1;
  vec_t wd0, wd1, rd0, rd1;
  sc_spmem_bank dut (.*);

  int checks = 0, failures = 0;
  vec_t ref_m [SPM_WORDS];
  vec_t exp0, exp1;
  logic chk0, chk1;

  function automatic vec_t rnd_vec();
    vec_t v;
    for (int l = 0; l < LANES; l++) v[l] = lane_t'($urandom);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we0 = 0; we1 = 0; re0 = 0; re1 = 0; chk0 = 0; chk1 = 0;
    wa0 = '0; wa1 = '0; ra0 = '0; ra1 = '0; wd0 = '0; wd1 = '0;
    // initialise a window of rows, including the last row of the bank
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      we0 = 1; wa0 = SPM_AW'(r < 32 ? r : SPM_WORDS - 64 + r); wd0 = rnd_vec();
      ref_m[wa0] = wd0;
    end
    @(negedge clk); we0 = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (chk0) begin checks++; if (rd0 !== exp0) begin failures++; $display("FAIL rd0 cycle %0d", c); end end
      if (chk1) begin checks++; if (rd1 !== exp1) begin failures++; $display("FAIL rd1 cycle %0d", c); end end
      re0 = $urandom_range(1); re1 = $urandom_range(1);
      ra0 = SPM_AW'($urandom_range(1) ? $urandom_range(31) : SPM_WORDS - 32 + $urandom_range(31));
      ra1 = SPM_AW'($urandom_range(1) ? $urandom_range(31) : SPM_WORDS - 32 + $urandom_range(31));
      we0 = $urandom_range(1); we1 = $urandom_range(1);
      wa0 = SPM_AW'($urandom_range(31)); wd0 = rnd_vec();
      wa1 = ($urandom_range(3) == 0) ? wa0 : SPM_AW'($urandom_range(31)); wd1 = rnd_vec();
      chk0 = re0; chk1 = re1;
      exp0 = ref_m[ra0]; exp1 = ref_m[ra1];     // old data
      if (we1) ref_m[wa1] = wd1;
      if (we0) ref_m[wa0] = wd0;                // port 0 wins
    end
    @(negedge clk);
    we0 = 0; we1 = 0; re0 = 0; re1 = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
