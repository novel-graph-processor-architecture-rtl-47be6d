// matrix_reader: reads a sparse matrix from node memory as an element stream.
//
// Turns a stored matrix into a stream of coordinate elements, producing the
// indices itself so that no instructions are spent on index arithmetic.
// Formats (Fig. 5 of the architecture):
//  * COO  - nnz words, each a full (row, col, val) triple.
//  * CSR  - (val, col) pairs plus one row-start pointer per stored row; the
//           row index is produced from the pointer array.
//  * CSC  - (val, row) pairs plus one column-start pointer per stored column.
//  * PAIR - outer products for C = A +.* B: A is read as CSC and B as CSR over
//           the same inner index k; for every k each A(i,k) is paired with
//           every B(k,j) and (i, j, A(i,k)) leaves with B(k,j) as the second
//           operand `out_b`, for the ALU to multiply.
// As in the architecture figure, the pointer array has one entry per vector
// and no end entry; the end of the last vector is the element count nnz.
// Addresses are 0-based word addresses (the figure counts from 1).
// Stored vector v has global index (v << vshift) | voffset, which undoes a
// cyclic distribution of rows or columns over the nodes (a choice of this
// design; the paper leaves the distribution mapping open).
//
// With `no_end` set the stream stops without its end token, so that a second
// matrix can follow in the same stream (used to feed A then B to the sorter
// for the element-wise operations).
//
// Memory: two asynchronous read ports (element and pointer), one word per
// address. Timing: one element per clock, plus one clock per vector (two per
// vector in PAIR mode) and, in PAIR mode, one clock per A element.
// Stream: valid/ready; the stream ends with an end token (last=1, no data).
module matrix_reader
  import gp_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fmt_e              fmt,
  input  logic [ADDR_W-1:0] base_a,   // element array of A
  input  logic [ADDR_W-1:0] ptr_a,    // pointer array of A
  input  logic [ADDR_W-1:0] nnz_a,
  input  logic [ADDR_W-1:0] base_b,   // PAIR mode: B (CSR)
  input  logic [ADDR_W-1:0] ptr_b,
  input  logic [ADDR_W-1:0] nnz_b,
  input  logic [ADDR_W-1:0] nvec,     // stored rows / columns / k values
  input  logic [4:0]        vshift,
  input  idx_t              voffset,
  input  logic              no_end,   // finish without an end token
  output logic              busy,
  // memory read ports (asynchronous)
  output logic [ADDR_W-1:0] rd_addr,
  input  elem_t             rd_data,
  output logic [ADDR_W-1:0] pt_addr,
  input  elem_t             pt_data,
  // element stream
  output logic              out_valid,
  input  logic              out_ready,
  output elem_t             out_elem,
  output val_t              out_b,
  output logic              out_last
);

  typedef enum logic [2:0] {R_IDLE, R_COO, R_VEC, R_VECB, R_ELEM, R_LOADA, R_PROD, R_END} rstate_e;
  rstate_e state;

  logic [ADDR_W-1:0] v, p, pe, q, q0, qe;
  elem_t             a_q;
  fmt_e              fmt_q;
  logic              no_end_q;
  idx_t              vg;
  logic              last_vec;

  assign vg       = (idx_t'(v) << vshift) | voffset;
  assign last_vec = (v + 1 >= nvec);
  assign busy     = (state != R_IDLE);

  // read addresses
  always_comb begin
    rd_addr = base_a + p;
    pt_addr = ptr_a + v;
    unique case (state)
      R_VEC:  begin pt_addr = ptr_a + v; rd_addr = ptr_a + v + 1; end
      R_VECB: begin pt_addr = ptr_b + v; rd_addr = ptr_b + v + 1; end
      R_PROD: rd_addr = base_b + q;
      default: ;
    endcase
  end

  // output stream
  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_elem  = rd_data;
    out_b     = '0;
    unique case (state)
      R_COO: out_valid = (p < nnz_a);
      R_ELEM: begin
        out_valid = (p < pe);
        if (fmt_q == FMT_CSC) out_elem.col = vg;
        else                  out_elem.row = vg;
      end
      R_PROD: begin
        out_valid = (q < qe);
        out_elem  = '{row: a_q.row, col: rd_data.col, val: a_q.val};
        out_b     = rd_data.val;
      end
      R_END: begin
        out_valid = !no_end_q;
        out_last  = 1'b1;
        out_elem  = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE;
      fmt_q <= FMT_COO;
      no_end_q <= 1'b0;
      v <= '0; p <= '0; pe <= '0; q <= '0; q0 <= '0; qe <= '0;
      a_q <= '0;
    end else begin
      unique case (state)
        R_IDLE: if (start) begin
          fmt_q    <= fmt;
          no_end_q <= no_end;
          v        <= '0;
          p     <= '0;
          state <= (fmt == FMT_COO) ? R_COO : R_VEC;
        end
        R_COO: begin
          if (p >= nnz_a)        state <= R_END;
          else if (out_ready)    p <= p + 1;
        end
        R_VEC: begin
          if (v >= nvec) state <= R_END;
          else begin
            p  <= pt_data.val;
            pe <= last_vec ? nnz_a : rd_data.val;
            state <= (fmt_q == FMT_PAIR) ? R_VECB : R_ELEM;
          end
        end
        R_VECB: begin
          q0    <= pt_data.val;
          qe    <= last_vec ? nnz_b : rd_data.val;
          state <= R_LOADA;
        end
        R_ELEM: begin
          if (p >= pe) begin
            v     <= v + 1;
            state <= R_VEC;
          end else if (out_ready) p <= p + 1;
        end
        R_LOADA: begin
          if (p < pe && q0 < qe) begin
            a_q   <= rd_data;
            q     <= q0;
            state <= R_PROD;
          end else begin
            v     <= v + 1;
            state <= R_VEC;
          end
        end
        R_PROD: begin
          if (q >= qe) begin
            p     <= p + 1;
            state <= R_LOADA;
          end else if (out_ready) q <= q + 1;
        end
        R_END: if (out_ready || no_end_q) state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end

endmodule
