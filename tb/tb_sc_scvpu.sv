// tb_sc_scvpu: runs each scVPU operation over a run of rows held in a
// model of the Spmem bank (synchronous read, as the real bank) and checks
// every result row against values computed here, and that a run of n rows
// takes n+1 cycles. Also checks that len = 0 uses the gather count and
// that in-place operation (destination = source a) works.
module tb_sc_scvpu;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy;
  instr_t instr = '0;
  logic [15:0] gather_count = '0;
  logic re0, re1, we;
  logic [SPM_AW-1:0] ra0, ra1, wa;
  vec_t rd0, rd1, wd;
  sc_scvpu dut (.*);

  vec_t mem [1024];
  always_ff @(posedge clk) begin
    if (re0) rd0 <= mem[ra0[9:0]];
    if (re1) rd1 <= mem[ra1[9:0]];
    if (we)  mem[wa[9:0]] <= wd;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic lane_t ref_op(vpu_op_e op, lane_t a, lane_t b, int sh);
    case (op)
      VPU_ADD: return a + b;
      VPU_SUB: return a - b;
      VPU_MUL: return lane_t'(longint'(a) * longint'(b));
      VPU_MAX: return (a > b) ? a : b;
      default: return a - (b >>> sh);
    endcase
  endfunction

  task automatic run(vpu_op_e op, int a, int b, int d, int len, int gc, int sh);
    vec_t sa [$], sb [$];
    int n, cyc;
    n = (len == 0) ? gc : len;
    for (int i = 0; i < n; i++) begin sa.push_back(mem[a + i]); sb.push_back(mem[b + i]); end
    @(negedge clk);
    instr = '0; instr.op = OP_T_VPU; instr.spa = 16'(a); instr.hbm = 32'(b);
    instr.spb = 16'(d); instr.len = 16'(len); instr.vop = op; instr.shift = 5'(sh);
    gather_count = 16'(gc);
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != n + 2) begin failures++; $display("FAIL op %0d: %0d cycles for %0d rows", op, cyc, n); end
    for (int i = 0; i < n; i++)
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (mem[d + i][l] !== ref_op(op, sa[i][l], sb[i][l], sh)) begin
          failures++; $display("FAIL op %0d row %0d lane %0d", op, i, l);
        end
      end
  endtask

  initial begin
    for (int r = 0; r < 1024; r++)
      for (int l = 0; l < LANES; l++) mem[r][l] = lane_t'($urandom_range(2000)) - 1000;
    repeat (3) @(posedge clk); rst_n = 1;
    run(VPU_ADD, 0, 100, 200, 20, 0, 0);
    run(VPU_SUB, 10, 110, 300, 17, 0, 0);
    run(VPU_MUL, 20, 120, 400, 9, 0, 0);
    run(VPU_MAX, 30, 130, 500, 33, 0, 0);
    run(VPU_SGD, 600, 700, 600, 0, 25, 3);   // in place, count from gather
    run(VPU_SGD, 640, 740, 800, 5, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
