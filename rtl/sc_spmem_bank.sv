// sc_spmem_bank: one tile's bank of the Sparse Vector Memory (Spmem).
//
// The paper gives the SparseCore 2.5 MiB of Spmem split into one slice per
// tile (16 slices). With 32-byte rows that is 5120 rows per bank, the
// default of WORDS. The port count is this design's choice: two write ports
// and two read ports, so a gather can store the fetched row and the incoming
// payload in the same cycle and the scVPU can read both operands at once.
// Reads are synchronous: data appears on rd0/rd1 the cycle after re0/re1 and
// returns the old contents when a write hits the same row in that cycle.
// When both write ports hit the same row, port 0 wins. Written as an array;
// a real chip would use SRAM macros here.
module sc_spmem_bank
  import sc_pkg::*;
#(
  parameter int unsigned WORDS = SPM_WORDS,
  parameter int unsigned AW    = SPM_AW
) (
  input  logic          clk,
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  vec_t          wd0,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  vec_t          wd1,
  input  logic          re0,
  input  logic [AW-1:0] ra0,
  output vec_t          rd0,
  input  logic          re1,
  input  logic [AW-1:0] ra1,
  output vec_t          rd1
);

  vec_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we1 && wa1 < AW'(WORDS)) mem[wa1] <= wd1;
    if (we0 && wa0 < AW'(WORDS)) mem[wa0] <= wd0;
  end

  always_ff @(posedge clk) begin
    if (re0) rd0 <= (ra0 < AW'(WORDS)) ? mem[ra0] : '0;
    if (re1) rd1 <= (ra1 < AW'(WORDS)) ? mem[ra1] : '0;
  end

endmodule
