// matrix_writer: stores an element stream into node memory as a sparse matrix.
//
// Takes a stream of coordinate elements, already in index order, and writes
// it in one of the formats of Fig. 5, building the pointer array on the fly
// so no separate instructions are needed:
//  * COO - each element is written as a full (row, col, val) word.
//  * CSR - each element is written as a (val, col) pair (row field zero) and
//          the writer fills in the row-start pointer of every stored row,
//          empty rows included. Input must be sorted row-major.
//  * CSC - the same with columns: (val, row) pairs and column-start
//          pointers. Input must be sorted column-major.
// A pointer word holds the 0-based element address in its val field; there
// is one pointer per stored vector and no end entry, as in Fig. 5. The local
// vector number is the global index >> vshift (cyclic distribution over the
// nodes, this design's choice). Elements whose vector number is nvec or more
// are still written but no pointer refers to them; `range_err` is set.
//
// Memory: one write port, one word per clock. Timing: one element per clock
// plus one clock for each pointer written. `done` rises after the end token
// (last=1, no element) has been taken and all pointers are written; `nnz`
// then holds the number of elements stored.
module matrix_writer
  import gp_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fmt_e              fmt,
  input  logic [ADDR_W-1:0] base_data,
  input  logic [ADDR_W-1:0] base_ptr,
  input  logic [ADDR_W-1:0] nvec,
  input  logic [4:0]        vshift,
  output logic              busy,
  output logic              done,
  output logic [ADDR_W-1:0] nnz,
  output logic              range_err,
  // element stream
  input  logic              in_valid,
  output logic              in_ready,
  input  elem_t             in_elem,
  input  logic              in_last,
  // memory write port
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output elem_t             wr_data
);

  logic              run;
  fmt_e              fmt_q;
  logic [ADDR_W-1:0] vnext;
  logic [ADDR_W-1:0] v_in;
  logic              need_ptr;   // a pointer must be written before this beat

  assign busy = run;
  assign v_in = ADDR_W'(((fmt_q == FMT_CSC) ? in_elem.col : in_elem.row) >> vshift);

  always_comb begin
    need_ptr = 1'b0;
    if (run && in_valid && fmt_q != FMT_COO && vnext < nvec)
      need_ptr = in_last || (vnext <= v_in);
  end

  assign in_ready = run && !need_ptr;

  always_comb begin
    wr_en   = 1'b0;
    wr_addr = base_data + nnz;
    wr_data = in_elem;
    if (need_ptr) begin
      wr_en   = 1'b1;
      wr_addr = base_ptr + vnext;
      wr_data = '{row: '0, col: '0, val: val_t'(nnz)};
    end else if (run && in_valid && !in_last) begin
      wr_en = 1'b1;
      if (fmt_q == FMT_CSR) wr_data.row = '0;
      if (fmt_q == FMT_CSC) wr_data.col = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      done      <= 1'b0;
      fmt_q     <= FMT_COO;
      vnext     <= '0;
      nnz       <= '0;
      range_err <= 1'b0;
    end else begin
      if (start) begin
        run       <= 1'b1;
        done      <= 1'b0;
        fmt_q     <= fmt;
        vnext     <= '0;
        nnz       <= '0;
        range_err <= 1'b0;
      end else if (need_ptr) begin
        vnext <= vnext + 1;
      end else if (in_valid && in_ready) begin
        if (in_last) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          nnz <= nnz + 1;
          if (fmt_q != FMT_COO && v_in >= nvec) range_err <= 1'b1;
        end
      end
    end
  end

endmodule
