// sc_fork_unit: the SparseCore Fork Unit.
//
// Splits one element stream into NUM_TILES per-tile streams. Embedding rows
// are sharded over the tiles by id (tile = id mod 16, this design's choice
// of row sharding), so each element goes to the tile whose HBM channel holds
// its row. Every tile must also learn where the stream ends, so when the
// final element has been delivered the unit sends an end-of-stream marker
// to every tile; each tile takes it when ready and the unit waits until all
// have. The paper only names the unit and shows its data path into the
// tiles' Fetch Units. The data bus is shared by all tiles, with one valid
// per tile; a data element passes in the cycle its tile is ready.
module sc_fork_unit
  import sc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  elem_t                in_elem,
  output logic [NUM_TILES-1:0] out_valid,
  input  logic [NUM_TILES-1:0] out_ready,
  output elem_t                out_elem,
  output logic                 busy
);

  logic                 marking;   // sending end markers
  logic [NUM_TILES-1:0] marked;    // tiles that have taken their marker
  logic [TILE_W-1:0]    owner;
  logic                 data_fire;

  assign owner = owner_tile(in_elem.id);

  always_comb begin
    out_valid = '0;
    out_elem  = in_elem;
    in_ready  = 1'b0;
    if (marking) begin
      out_elem       = '0;
      out_elem.last  = 1'b1;
      out_elem.empty = 1'b1;
      out_valid      = ~marked;
    end else if (in_valid && !in_elem.empty) begin
      out_elem.last   = 1'b0;
      out_valid[owner] = 1'b1;
      in_ready        = out_ready[owner];
    end else if (in_valid && in_elem.empty) begin
      in_ready = 1'b1;        // the marker is replaced by the broadcast
    end
  end

  assign data_fire = in_valid && in_ready;
  assign busy      = marking;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      marking <= 1'b0;
      marked  <= '0;
    end else if (marking) begin
      if (&(marked | (out_valid & out_ready))) begin
        marking <= 1'b0;
        marked  <= '0;
      end else begin
        marked <= marked | (out_valid & out_ready);
      end
    end else if (data_fire && in_elem.last) begin
      marking <= 1'b1;
      marked  <= '0;
    end
  end

endmodule
