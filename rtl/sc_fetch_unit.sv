// sc_fetch_unit: a tile's Fetch Unit, which reads activations and parameters
// from the tile's HBM channel into its Spmem bank.
//
// Two operations, started by a one-cycle start pulse with the instruction:
//  T_FETCH  reads rows hbm .. hbm+len-1 into Spmem rows spa .. spa+len-1.
//  T_GATHER takes elements from the Fork Unit until the end-of-stream marker.
//           The k-th element's row, HBM[hbm + id / NUM_TILES], is read into
//           Spmem[spa+k], its payload vector is written to Spmem[spb+k] and
//           its id is kept in the tile's id list; count ends up holding k.
// Up to MAX_OUTSTANDING reads may be in flight; the paper says a tile
// "supports multiple outstanding memory accesses" but not how many, so 16 is
// this design's choice. Each read carries the Spmem offset as its tag, so
// responses may come back in any order. One read can issue per cycle; busy
// falls once the last response has been written. The HBM response has no
// back-pressure: the outstanding limit is what keeps it safe.
// The unit only reads HBM, so the request's write enable and write data are
// constant zero, and the Spmem write data are the HBM response and the Fork
// payload wired straight through.
module sc_fetch_unit
  import sc_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  // Fork Unit stream
  input  logic              fork_valid,
  output logic              fork_ready,
  input  elem_t             fork_elem,
  // HBM channel
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output hbm_req_t          hbm_req,
  input  logic              hbm_rsp_valid,
  input  hbm_rsp_t          hbm_rsp,
  // Spmem write ports
  output logic              we0,
  output logic [SPM_AW-1:0] wa0,
  output vec_t              wd0,
  output logic              we1,
  output logic [SPM_AW-1:0] wa1,
  output vec_t              wd1,
  // id list
  output logic              id_we,
  output logic [ID_AW-1:0]  id_wa,
  output id_t               id_wd,
  output logic [15:0]       count,
  // the outstanding limit held back a read this cycle
  output logic              limit_stall
);

  localparam int unsigned OW = $clog2(MAX_OUTSTANDING + 1);

  logic              active, gather, eos;
  logic [15:0]       issued, len_q, spa_q, spb_q, gcount;
  logic [HBM_AW-1:0] hbm_q;
  logic [OW-1:0]     outstanding;
  logic              room, issue, take, want;

  assign room  = outstanding < OW'(MAX_OUTSTANDING);
  // T_FETCH wants a read while rows remain; T_GATHER while a data element waits.
  assign want  = active && (gather ? (fork_valid && !fork_elem.empty && !eos)
                                   : (issued < len_q));
  assign issue = want && room && hbm_req_ready;
  // The end marker needs no read and is taken at once.
  assign take  = active && gather && !eos && fork_valid &&
                 (fork_elem.empty || issue);
  assign fork_ready  = take;
  assign limit_stall = want && !room;

  assign hbm_req_valid = want && room;
  always_comb begin
    hbm_req       = '0;
    hbm_req.we    = 1'b0;
    hbm_req.addr  = gather ? hbm_q + local_row(fork_elem.id) : hbm_q + HBM_AW'(issued);
    hbm_req.tag   = TAG_W'(issued);
  end

  // fetched rows
  assign we0 = hbm_rsp_valid;
  assign wa0 = SPM_AW'(spa_q + hbm_rsp.tag);
  assign wd0 = hbm_rsp.rdata;
  // gather payloads and ids
  assign we1   = issue && gather;
  assign wa1   = SPM_AW'(spb_q + issued);
  assign wd1   = fork_elem.vec;
  assign id_we = issue && gather;
  assign id_wa = ID_AW'(issued);
  assign id_wd = fork_elem.id;
  assign count = gcount;

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; gather <= 1'b0; eos <= 1'b0;
      issued <= '0; gcount <= '0; len_q <= '0; spa_q <= '0; spb_q <= '0; hbm_q <= '0;
      outstanding <= '0;
    end else begin
      outstanding <= outstanding + OW'(issue) - OW'(hbm_rsp_valid);
      if (start) begin
        active <= 1'b1;
        gather <= (instr.op == OP_T_GATHER);
        eos    <= 1'b0;
        issued <= '0;
        if (instr.op == OP_T_GATHER) gcount <= '0;
        len_q  <= instr.len;
        spa_q  <= instr.spa;
        spb_q  <= instr.spb;
        hbm_q  <= instr.hbm;
      end else if (active) begin
        if (issue) issued <= issued + 16'd1;
        if (issue && gather) gcount <= issued + 16'd1;
        if (take && fork_elem.last) eos <= 1'b1;
        if ((gather ? eos : (issued == len_q)) && outstanding == '0 && !issue)
          active <= 1'b0;
      end
    end
  end

  // A response can only answer a read that was issued.
  a_no_spurious_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    hbm_rsp_valid |-> outstanding != '0);
  a_limit: assert property (@(posedge clk) disable iff (!rst_n)
    outstanding <= OW'(MAX_OUTSTANDING));

endmodule
