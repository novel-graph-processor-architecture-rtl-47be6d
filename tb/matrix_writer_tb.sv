// matrix_writer_tb: streams sorted elements in and checks the stored layout.
//
// The 4x4 example of the storage-format figure is written as CSR and CSC and
// the memory is compared with the printed arrays (pairs and start pointers
// 1,2,4,6 / 1,2,5,7, here counted from 0). Random matrices with empty
// leading, inner and trailing rows are written as CSR and COO and compared
// with layouts built here. Pointer writes stall the input one clock each.
module matrix_writer_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  elem_t mem [4096];
  logic start, busy, done, range_err, in_valid, in_ready, in_last, wr_en;
  fmt_e fmt;
  logic [31:0] base_data, base_ptr, nvec, nnz, wr_addr;
  logic [4:0] vshift;
  elem_t in_elem, wr_data;
  always @(posedge clk) if (wr_en) mem[wr_addr[11:0]] <= wr_data;

  matrix_writer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(elem_t e, logic last);
    in_valid = 1; in_elem = e; in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  task automatic expect_word(string what, int addr, elem_t e);
    checks++;
    if (mem[addr] != e) begin
      failures++;
      if (failures < 10) $display("%s: mem[%0d]=%h expected %h", what, addr, mem[addr], e);
    end
  endtask

  task automatic begin_write(fmt_e f, int bd, int bp, int nv);
    fmt = f; base_data = bd; base_ptr = bp; nvec = nv;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  int M [8][8];

  initial begin
    int fig_val [7] = '{12, 21, 23, 32, 34, 42, 43};
    int fig_row [7] = '{1, 2, 2, 3, 3, 4, 4};
    int fig_col [7] = '{2, 1, 3, 2, 4, 2, 3};
    int csc_val [7] = '{21, 12, 32, 42, 23, 43, 34};
    int csc_row [7] = '{2, 1, 3, 4, 2, 4, 3};
    int csc_col [7] = '{1, 2, 2, 2, 3, 3, 4};
    int rs [4] = '{1, 2, 4, 6};
    int cs [4] = '{1, 2, 5, 7};
    start = 0; in_valid = 0; in_last = 0; in_elem = '0; vshift = 0;
    fmt = FMT_COO; base_data = 0; base_ptr = 0; nvec = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // figure example as CSR
    begin_write(FMT_CSR, 100, 200, 4);
    for (int i = 0; i < 7; i++) send('{row: fig_row[i] - 1, col: fig_col[i] - 1, val: fig_val[i]}, 0);
    send('0, 1);
    @(negedge clk);
    checks++; if (!done || nnz != 7) begin failures++; $display("CSR done=%0d nnz=%0d", done, nnz); end
    for (int i = 0; i < 7; i++) expect_word("fig CSR data", 100 + i, '{row: 0, col: fig_col[i] - 1, val: fig_val[i]});
    for (int r = 0; r < 4; r++) expect_word("fig CSR ptr", 200 + r, '{row: 0, col: 0, val: rs[r] - 1});

    // figure example as CSC
    begin_write(FMT_CSC, 300, 400, 4);
    for (int i = 0; i < 7; i++) send('{row: csc_row[i] - 1, col: csc_col[i] - 1, val: csc_val[i]}, 0);
    send('0, 1);
    @(negedge clk);
    for (int i = 0; i < 7; i++) expect_word("fig CSC data", 300 + i, '{row: csc_row[i] - 1, col: 0, val: csc_val[i]});
    for (int c = 0; c < 4; c++) expect_word("fig CSC ptr", 400 + c, '{row: 0, col: 0, val: cs[c] - 1});

    // random CSR with empty rows (row 0, 3 and 7 always empty), vshift = 1
    vshift = 1;
    for (int trial = 0; trial < 5; trial++) begin
      int n;
      n = 0;
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
        M[r][c] = (r != 0 && r != 3 && r != 7 && $urandom % 3 == 0) ? 1 + $urandom % 999 : 0;
      begin_write(FMT_CSR, 1000, 1500, 8);
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
        if (M[r][c] != 0) send('{row: (r << 1) | 1, col: c, val: M[r][c]}, 0);
      send('0, 1);
      @(negedge clk);
      for (int r = 0; r < 8; r++) begin
        expect_word("rand CSR ptr", 1500 + r, '{row: 0, col: 0, val: n});
        for (int c = 0; c < 8; c++) if (M[r][c] != 0) begin
          expect_word("rand CSR data", 1000 + n, '{row: 0, col: c, val: M[r][c]}); n++;
        end
      end
      checks++; if (nnz != n || range_err) begin failures++; $display("nnz %0d expected %0d", nnz, n); end
    end
    vshift = 0;

    // COO
    begin_write(FMT_COO, 2000, 0, 0);
    for (int i = 0; i < 20; i++) send('{row: i, col: 2 * i, val: 7 * i}, 0);
    send('0, 1);
    @(negedge clk);
    for (int i = 0; i < 20; i++) expect_word("COO", 2000 + i, '{row: i, col: 2 * i, val: 7 * i});

    // an element beyond nvec sets range_err
    begin_write(FMT_CSR, 3000, 3100, 2);
    send('{row: 5, col: 0, val: 1}, 0);
    send('0, 1);
    @(negedge clk);
    checks++; if (!range_err) begin failures++; $display("range_err not set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
