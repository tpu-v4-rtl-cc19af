// sc_concat_unit: the SparseCore Concat Unit.
//
// Joins the output streams of the tiles named in the CONCAT instruction's
// mask into one stream. Each tile's stream ends with an element marked last
// (or an empty end marker). The unit serves the tiles round robin, one
// element per cycle, so all tiles' Flush Units drain at once; a tile drops
// out when its last element has passed. Only the final tile's last is kept
// on the joined stream, so it too ends with exactly one last; empty markers
// of the other tiles are dropped. The paper names the unit and shows the
// data path from the tiles' Flush Units into it and out of the SparseCore;
// the round-robin order is this design's choice, so elements of different
// tiles interleave and the receiver must go by id, not by position.
// Combinational from tile to output; start is a one-cycle pulse.
module sc_concat_unit
  import sc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NUM_TILES-1:0] mask,
  input  logic [NUM_TILES-1:0] in_valid,
  output logic [NUM_TILES-1:0] in_ready,
  input  elem_t                in_elem [NUM_TILES],
  output logic                 out_valid,
  input  logic                 out_ready,
  output elem_t                out_elem,
  output logic                 busy
);

  logic [NUM_TILES-1:0] pending;   // tiles whose stream has not ended
  logic [TILE_W-1:0]    ptr, sel;
  logic                 found, final_one, drop;

  always_comb begin
    found = 1'b0;
    sel   = ptr;
    for (int k = 0; k < NUM_TILES; k++) begin
      logic [TILE_W-1:0] t;
      t = ptr + TILE_W'(k);
      if (!found && pending[t] && in_valid[t]) begin
        found = 1'b1;
        sel   = t;
      end
    end
  end

  always_comb begin
    final_one = found && in_elem[sel].last &&
                ((pending & ~(NUM_TILES'(1) << sel)) == '0);
    drop      = found && in_elem[sel].empty && !final_one;
    out_elem      = in_elem[sel];
    out_elem.last = final_one;
    out_valid     = found && !drop;
    in_ready      = '0;
    in_ready[sel] = found && (drop || out_ready);
  end

  assign busy = pending != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      ptr     <= '0;
    end else if (start) begin
      pending <= mask;
      ptr     <= '0;
    end else if (found && (drop || out_ready)) begin
      ptr <= sel + TILE_W'(1);
      if (in_elem[sel].last) pending[sel] <= 1'b0;
    end
  end

endmodule
