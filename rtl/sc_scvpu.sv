// sc_scvpu: a tile's scVPU, the 8-wide SIMD vector processing unit.
//
// The paper gives its width (8 lanes) and says it uses the same ALUs as the
// TensorCore's vector unit and is programmable. This design gives it one
// element-wise operation per instruction over a run of Spmem rows:
//   Spmem[dst+i] = f(Spmem[a+i], Spmem[b+i]),  i < n
// with f one of add, subtract, multiply, max and an SGD step
// a - (b >>> shift), on 32-bit integer lanes (the lane format is this
// design's choice). a is instr.spa, b is instr.hbm[15:0], dst is instr.spb;
// n is instr.len, or the tile's gather count when len is 0.
// Timing: rows a+i and b+i are read in cycle i, the result written in cycle
// i+1, so a run of n rows takes n+1 cycles after start. Writing in place
// (dst == a) is safe because every row is read before it is written.
module sc_scvpu
  import sc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  input  logic [15:0]       gather_count,
  output logic              busy,
  // Spmem read ports (data one cycle after the address)
  output logic              re0,
  output logic [SPM_AW-1:0] ra0,
  input  vec_t              rd0,
  output logic              re1,
  output logic [SPM_AW-1:0] ra1,
  input  vec_t              rd1,
  // Spmem write port
  output logic              we,
  output logic [SPM_AW-1:0] wa,
  output vec_t              wd
);

  logic        active, pend;
  logic [15:0] i, n, a_q, b_q, d_q, pend_i;
  vpu_op_e     op_q;
  logic [4:0]  sh_q;

  function automatic lane_t alu(vpu_op_e op, lane_t x, lane_t y, logic [4:0] sh);
    case (op)
      VPU_ADD: return x + y;
      VPU_SUB: return x - y;
      VPU_MUL: return x * y;
      VPU_MAX: return (x > y) ? x : y;
      VPU_SGD: return x - (y >>> sh);
      default: return x;
    endcase
  endfunction

  assign re0 = active && (i < n);
  assign re1 = re0;
  assign ra0 = SPM_AW'(a_q + i);
  assign ra1 = SPM_AW'(b_q + i);

  assign we = pend;
  assign wa = SPM_AW'(d_q + pend_i);
  always_comb
    for (int l = 0; l < LANES; l++) wd[l] = alu(op_q, rd0[l], rd1[l], sh_q);

  assign busy = active || pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; pend <= 1'b0;
      i <= '0; n <= '0; a_q <= '0; b_q <= '0; d_q <= '0; pend_i <= '0;
      op_q <= VPU_ADD; sh_q <= '0;
    end else begin
      pend   <= re0;
      pend_i <= i;
      if (start) begin
        active <= 1'b1;
        i      <= '0;
        n      <= (instr.len == '0) ? gather_count : instr.len;
        a_q    <= instr.spa;
        b_q    <= instr.hbm[15:0];
        d_q    <= instr.spb;
        op_q   <= instr.vop;
        sh_q   <= instr.shift;
      end else if (active) begin
        if (i < n) i <= i + 16'd1;
        else       active <= 1'b0;
      end
    end
  end

endmodule
