// sc_sparse_reduce: the SparseCore Sparse Reduce Unit.
//
// Takes the id-sorted stream from the Sort Unit and merges every run of
// elements with the same id into one element whose vector is the lane-wise
// sum of the run. In the backward pass this combines the gradients of a
// repeated feature value before the one update of its row; in the forward
// pass it deduplicates the ids to look up. The paper names the unit and the
// purpose (deduplication, summing multivalent rows); the streaming form is
// this design's choice. One accumulator register holds the run being summed
// and one output register holds a finished element, so a run of n inputs is
// taken in n cycles and leaves one cycle after the next different id (or
// the last element) arrives. Sums wrap on overflow. merge pulses once for
// every input element folded into an earlier one.
module sc_sparse_reduce
  import sc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_elem,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_elem,
  output logic  busy,
  output logic  merge
);

  elem_t acc, o;
  logic  acc_v, o_v, o_free, take, same;

  assign o_free   = !o_v || out_ready;
  assign in_ready = !(acc_v && acc.last) && o_free;
  assign take     = in_valid && in_ready;
  assign same     = acc_v && !in_elem.empty && (acc.id == in_elem.id);
  assign merge    = take && same;

  assign out_valid = o_v;
  assign out_elem  = o;
  assign busy      = acc_v || o_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; o <= '0; acc_v <= 1'b0; o_v <= 1'b0;
    end else begin
      if (o_v && out_ready) o_v <= 1'b0;
      if (acc_v && acc.last && o_free) begin
        // finished run of the final id: hand it on
        o     <= acc;
        o_v   <= 1'b1;
        acc_v <= 1'b0;
      end else if (take) begin
        if (same) begin
          for (int l = 0; l < LANES; l++) acc.vec[l] <= acc.vec[l] + in_elem.vec[l];
          acc.last <= in_elem.last;
        end else if (in_elem.empty) begin
          if (acc_v) acc.last <= 1'b1;           // marker closes the held run
          else begin o <= in_elem; o_v <= 1'b1; end  // nothing held: pass it on
        end else begin
          if (acc_v) begin o <= acc; o_v <= 1'b1; end
          acc   <= in_elem;
          acc_v <= 1'b1;
        end
      end
    end
  end

endmodule
