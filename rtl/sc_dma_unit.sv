// sc_dma_unit: the SparseCore DMA Unit, its port to the inter-chip
// interconnect (ICI).
//
// The paper's block diagram draws the DMA Unit with a two-way link to ICI
// and the text says remote memories are reached by asynchronous DMA; how
// the unit frames its transfers is this design's choice. It has two
// independent engines:
//  DMA_IN  (len) takes len elements from the ICI input and passes them to
//          the Sort Unit, marking the len-th last; with len = 0 it sends one
//          end-of-stream marker. The last/empty bits arriving on ICI are
//          ignored: the instruction sets the length.
//  DMA_OUT passes the Concat Unit's stream to the ICI output until the
//          element marked last, and counts the data elements it sent
//          (out_count, kept until the next DMA_OUT).
// Both are combinational pass-throughs with one element per cycle, and each
// is busy from its start pulse until its final element has passed.
module sc_dma_unit
  import sc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_in,
  input  logic        start_out,
  input  logic [15:0] len,
  output logic        in_busy,
  output logic        out_busy,
  output logic [15:0] out_count,
  // ICI side
  input  logic        ici_in_valid,
  output logic        ici_in_ready,
  input  elem_t       ici_in_elem,
  output logic        ici_out_valid,
  input  logic        ici_out_ready,
  output elem_t       ici_out_elem,
  // SparseCore side
  output logic        sort_valid,
  input  logic        sort_ready,
  output elem_t       sort_elem,
  input  logic        cat_valid,
  output logic        cat_ready,
  input  elem_t       cat_elem
);

  logic [15:0] in_left;
  logic        in_fire, out_fire;

  // inbound
  always_comb begin
    sort_elem       = ici_in_elem;
    sort_elem.empty = 1'b0;
    sort_elem.last  = (in_left == 16'd1);
    sort_valid      = in_busy && ici_in_valid;
    ici_in_ready    = in_busy && sort_ready;
    if (in_busy && in_left == '0) begin   // zero-length transfer
      sort_elem       = '0;
      sort_elem.last  = 1'b1;
      sort_elem.empty = 1'b1;
      sort_valid      = 1'b1;
      ici_in_ready    = 1'b0;
    end
  end
  assign in_fire = sort_valid && sort_ready;

  // outbound
  assign ici_out_valid = out_busy && cat_valid;
  assign ici_out_elem  = cat_elem;
  assign cat_ready     = out_busy && ici_out_ready;
  assign out_fire      = ici_out_valid && ici_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_busy <= 1'b0; in_left <= '0; out_busy <= 1'b0; out_count <= '0;
    end else begin
      if (start_in) begin
        in_busy <= 1'b1;
        in_left <= len;
      end else if (in_fire) begin
        if (in_left <= 16'd1) in_busy <= 1'b0;
        if (in_left != '0) in_left <= in_left - 16'd1;
      end
      if (start_out) begin
        out_busy  <= 1'b1;
        out_count <= '0;
      end else if (out_fire) begin
        if (!cat_elem.empty) out_count <= out_count + 16'd1;
        if (cat_elem.last) out_busy <= 1'b0;
      end
    end
  end

endmodule
