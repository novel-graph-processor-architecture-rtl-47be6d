// stream_alu: the node's streaming arithmetic/logic unit.
//
// Works on a stream of coordinate elements instead of a register file.
// Two modes, set before a stream starts:
//  * MAP: every element leaves with val = op(val, b), where b is the second
//    operand carried beside the element (the B value of a partial-product
//    pair from the matrix reader, or a constant). Used to form partial
//    products a*b and for the matrix-constant operation op(k, A).
//  * REDUCE: successive elements with identical (row, col) are combined with
//    op into one element, so an index-sorted stream of partial products
//    comes out accumulated. With `match_only` set only indices that occurred
//    at least twice are kept: that is the element-wise A.*B / A./B of two
//    sorted matrices, while REDUCE without it gives A.+B / A.-B. For SUB and
//    DIV the earlier element is the left operand.
// The paper gives the streaming principle and the example of accumulating
// successive elements only when indices match; the modes, the match_only
// flag and the operator list encoding are this design's.
//
// Interface: valid/ready streams; a beat with last=1 is an end-of-stream
// token with no element, passed on after any held accumulation.
// Timing: one element per clock; MAP adds one clock of latency, REDUCE holds
// each result until the next index (or the end token) arrives.
module stream_alu
  import gp_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    mode_reduce,
  input  alu_op_e op,
  input  logic    match_only,
  // input stream
  input  logic    in_valid,
  output logic    in_ready,
  input  elem_t   in_elem,
  input  val_t    in_b,
  input  logic    in_last,
  // output stream
  output logic    out_valid,
  input  logic    out_ready,
  output elem_t   out_elem,
  output logic    out_last,
  // number of matching-index combinations performed (statistics)
  output logic [31:0] match_count
);

  elem_t       acc;
  logic        acc_v;
  logic [31:0] acc_n;      // elements folded into acc
  logic        end_pend;   // end token seen, acc still to flush

  logic  slot_free;
  logic  take;
  logic  same_idx;
  logic  keep_acc;

  assign slot_free = !out_valid || out_ready;
  assign in_ready  = slot_free && !end_pend;
  assign take      = in_valid && in_ready;
  assign same_idx  = acc_v && (acc.row == in_elem.row) && (acc.col == in_elem.col);
  assign keep_acc  = match_only ? (acc_n >= 2) : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_elem    <= '0;
      out_last    <= 1'b0;
      acc         <= '0;
      acc_v       <= 1'b0;
      acc_n       <= '0;
      end_pend    <= 1'b0;
      match_count <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (end_pend && slot_free) begin
        // the held result went out last clock: now the end token
        out_valid <= 1'b1;
        out_last  <= 1'b1;
        end_pend  <= 1'b0;
      end else if (take) begin
        if (!mode_reduce) begin
          out_valid    <= 1'b1;
          out_last     <= in_last;
          out_elem     <= in_elem;
          out_elem.val <= alu_apply(op, in_elem.val, in_b);
        end else if (in_last) begin
          if (acc_v && keep_acc) begin
            out_valid <= 1'b1;
            out_last  <= 1'b0;
            out_elem  <= acc;
            end_pend  <= 1'b1;
          end else begin
            out_valid <= 1'b1;
            out_last  <= 1'b1;
          end
          acc_v <= 1'b0;
        end else if (same_idx) begin
          acc.val     <= alu_apply(op, acc.val, in_elem.val);
          acc_n       <= acc_n + 1;
          match_count <= match_count + 1;
        end else begin
          if (acc_v && keep_acc) begin
            out_valid <= 1'b1;
            out_last  <= 1'b0;
            out_elem  <= acc;
          end
          acc   <= in_elem;
          acc_v <= 1'b1;
          acc_n <= 32'd1;
        end
      end
    end
  end

endmodule
