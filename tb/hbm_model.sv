// hbm_model: behavioural model of one HBM channel as a SparseCore tile sees
// it, for simulation only (not synthesizable intent, not a DRAM model).
//
// Requests are taken when req_ready is high; req_ready is high on
// READY_PCT percent of cycles, at random, to exercise back-pressure. A write
// updates mem at once. A read returns its row LAT cycles later on
// rsp_valid/rsp, with the request's tag; responses come back in request
// order. With JITTER > 0 each read instead waits LAT plus a random 0..JITTER
// cycles in a pool of POOL slots, and the lowest ready slot is returned
// first, so responses come back out of order (at most one per cycle); req_ready
// also drops while the pool is full. mem is DEPTH rows of one 8-lane vector and is preloaded and
// checked by the testbench through hierarchical references. Addresses at or
// above DEPTH read as zero and are not written.
module hbm_model
  import sc_pkg::*;
#(
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned LAT       = 20,
  parameter int unsigned READY_PCT = 100,
  parameter int unsigned JITTER    = 0,
  parameter int unsigned POOL      = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  hbm_req_t req,
  output logic     rsp_valid,
  output hbm_rsp_t rsp
);

  vec_t     mem [DEPTH];
  logic     pipe_v [LAT];
  hbm_rsp_t pipe_d [LAT];
  int unsigned reads, writes;

  logic     pool_v [POOL];
  int       pool_t [POOL];
  hbm_rsp_t pool_d [POOL];
  logic     jit_v;
  hbm_rsp_t jit_d;
  int       in_pool;

  assign rsp_valid = (JITTER == 0) ? pipe_v[LAT-1] : jit_v;
  assign rsp       = (JITTER == 0) ? pipe_d[LAT-1] : jit_d;

  always_comb begin
    in_pool = 0;
    for (int k = 0; k < POOL; k++) if (pool_v[k]) in_pool++;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      reads     <= 0;
      writes    <= 0;
      for (int k = 0; k < LAT; k++) begin pipe_v[k] <= 1'b0; pipe_d[k] <= '0; end
      for (int k = 0; k < POOL; k++) begin pool_v[k] <= 1'b0; pool_t[k] <= 0; pool_d[k] <= '0; end
      jit_v <= 1'b0;
      jit_d <= '0;
    end else begin
      automatic bit sent = 1'b0;
      automatic bit placed = 1'b0;
      req_ready <= ($urandom_range(99) < READY_PCT) && (in_pool + 2 < int'(POOL));
      jit_v <= 1'b0;
      for (int k = 0; k < POOL; k++) begin
        if (pool_v[k] && pool_t[k] > 0) pool_t[k] <= pool_t[k] - 1;
        if (pool_v[k] && pool_t[k] == 0 && !sent) begin
          sent = 1'b1;
          jit_v <= 1'b1;
          jit_d <= pool_d[k];
          pool_v[k] <= 1'b0;
        end
      end
      for (int k = LAT-1; k > 0; k--) begin
        pipe_v[k] <= pipe_v[k-1];
        pipe_d[k] <= pipe_d[k-1];
      end
      pipe_v[0] <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.we) begin
          if (req.addr < DEPTH) mem[req.addr] <= req.wdata;
          writes <= writes + 1;
        end else begin
          if (JITTER == 0) begin
            pipe_v[0]       <= 1'b1;
            pipe_d[0].tag   <= req.tag;
            pipe_d[0].rdata <= (req.addr < DEPTH) ? mem[req.addr] : '0;
          end else begin
            for (int k = 0; k < POOL; k++) begin
              if (!pool_v[k] && !placed) begin
                placed = 1'b1;
                pool_v[k]       <= 1'b1;
                pool_t[k]       <= int'(LAT) + int'($urandom_range(JITTER));
                pool_d[k].tag   <= req.tag;
                pool_d[k].rdata <= (req.addr < DEPTH) ? mem[req.addr] : '0;
              end
            end
          end
          reads <= reads + 1;
        end
      end
    end
  end

endmodule
