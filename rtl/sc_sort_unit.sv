// sc_sort_unit: the SparseCore Sort Unit.
//
// Sorts a variable-length list of stream elements by feature id, so that
// repeated ids sit next to each other and the Sparse Reduce Unit behind it
// can merge them (deduplication, which the paper says the substrate must
// support). The paper names the unit only; how it sorts is this design's
// choice: elements are collected into a SORT_DEPTH-entry buffer until the
// element marked last, then an odd-even transposition network sorts the
// filled entries in as many passes as there are entries (one pass a cycle),
// then they stream out in ascending id order, last on the final one. The
// run time thus depends on the list length, as the paper says of the
// SparseCore's instructions. A list longer than SORT_DEPTH is sorted in
// batches of SORT_DEPTH (each batch ends without last, and overflow pulses);
// duplicates that fall in different batches are then not merged. An
// end-of-stream marker on an empty buffer is passed straight through.
// Equal ids keep no particular order.
module sc_sort_unit
  import sc_pkg::*;
#(
  parameter int unsigned SORT_DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_elem,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_elem,
  output logic  busy,
  output logic  overflow
);

  localparam int unsigned CW = $clog2(SORT_DEPTH + 1);

  typedef enum logic [1:0] {S_FILL, S_SORT, S_DRAIN, S_MARK} state_e;

  state_e        state;
  elem_t         buf_q [SORT_DEPTH];
  logic [CW-1:0] cnt, pass, rd;
  logic          saw_last;

  assign in_ready = (state == S_FILL);
  assign busy     = (state != S_FILL) || (cnt != '0);

  always_comb begin
    out_elem      = buf_q[rd[CW-2:0]];
    out_elem.last = saw_last && (rd == cnt - CW'(1));
    out_valid     = (state == S_DRAIN);
    if (state == S_MARK) begin
      out_elem       = '0;
      out_elem.last  = 1'b1;
      out_elem.empty = 1'b1;
      out_valid      = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FILL; cnt <= '0; pass <= '0; rd <= '0; saw_last <= 1'b0;
      overflow <= 1'b0;
      for (int k = 0; k < SORT_DEPTH; k++) buf_q[k] <= '0;
    end else begin
      overflow <= 1'b0;
      case (state)
        S_FILL: if (in_valid) begin
          if (in_elem.empty) begin
            // end marker: sort what is held, or pass the marker on
            saw_last <= 1'b1;
            pass     <= '0;
            state    <= (cnt == '0) ? S_MARK : S_SORT;
          end else begin
            buf_q[cnt[CW-2:0]] <= in_elem;
            cnt                <= cnt + CW'(1);
            pass               <= '0;
            if (in_elem.last) begin
              saw_last <= 1'b1;
              state    <= S_SORT;
            end else if (cnt == CW'(SORT_DEPTH - 1)) begin
              saw_last <= 1'b0;
              overflow <= 1'b1;
              state    <= S_SORT;
            end
          end
        end
        S_SORT: begin
          // one odd-even transposition pass over entries 0 .. cnt-1
          for (int k = 0; k + 1 < SORT_DEPTH; k++)
            if ((k[0] == pass[0]) && (CW'(k + 1) < cnt) &&
                (buf_q[k].id > buf_q[k+1].id)) begin
              buf_q[k]   <= buf_q[k+1];
              buf_q[k+1] <= buf_q[k];
            end
          pass <= pass + CW'(1);
          if (pass + CW'(1) >= cnt) begin
            state <= S_DRAIN;
            rd    <= '0;
          end
        end
        S_DRAIN: if (out_ready) begin
          rd <= rd + CW'(1);
          if (rd == cnt - CW'(1)) begin
            state <= S_FILL;
            cnt   <= '0;
          end
        end
        S_MARK: if (out_ready) begin
          state    <= S_FILL;
          saw_last <= 1'b0;
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
