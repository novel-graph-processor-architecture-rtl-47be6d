// matrix_reader_tb: reads matrices stored by the testbench and checks streams.
//
// First the 4x4 example of the storage-format figure (values 12..43, row
// starts 1,2,4,6 and column starts 1,2,5,7 counted from 1) is laid out in
// COO, CSR and CSC and read back; then random matrices with empty rows and
// columns, with a shifted/offset vector numbering; then PAIR mode, whose
// output must be every product pair A(i,k),B(k,j) in k, A-order, B-order.
// The CSR read rate (one element per clock plus one per row) is checked.
module matrix_reader_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  elem_t mem [4096];
  logic start, busy, out_valid, out_ready, out_last;
  fmt_e fmt;
  logic [31:0] base_a, ptr_a, nnz_a, base_b, ptr_b, nnz_b, nvec, rd_addr, pt_addr;
  logic [4:0] vshift;
  idx_t voffset;
  logic no_end;
  elem_t rd_data, pt_data, out_elem;
  val_t out_b;
  assign rd_data = mem[rd_addr[11:0]];
  assign pt_data = mem[pt_addr[11:0]];

  matrix_reader dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  elem_t exp_q [$];
  val_t  expb_q [$];
  int    run_clocks;

  task automatic run_and_check(string what, bit check_b, bit stall);
    elem_t got [$]; val_t gotb [$]; int t0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    forever begin
      out_ready = ($urandom % 4 != 0) || !stall;
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (out_last) break;
        got.push_back(out_elem); gotb.push_back(out_b);
      end
      @(negedge clk);
    end
    run_clocks = ($time - t0) / 10;
    @(negedge clk);
    checks++;
    if (got.size() != exp_q.size()) begin failures++; $display("%s: %0d elements, expected %0d", what, got.size(), exp_q.size()); end
    for (int i = 0; i < got.size() && i < exp_q.size(); i++) begin
      checks++;
      if (got[i] != exp_q[i] || (check_b && gotb[i] != expb_q[i])) begin
        failures++;
        if (failures < 10) $display("%s: item %0d got %h/%h exp %h/%h", what, i, got[i], gotb[i], exp_q[i], expb_q[i]);
      end
    end
    exp_q.delete(); expb_q.delete();
  endtask

  // dense reference matrices
  int A [8][8];
  int B [8][8];

  initial begin
    int fig_val [7] = '{12, 21, 23, 32, 34, 42, 43};
    int fig_row [7] = '{1, 2, 2, 3, 3, 4, 4};
    int fig_col [7] = '{2, 1, 3, 2, 4, 2, 3};
    start = 0; out_ready = 1; fmt = FMT_COO; vshift = 0; voffset = 0; no_end = 0;
    base_a = 0; ptr_a = 0; nnz_a = 0; base_b = 0; ptr_b = 0; nnz_b = 0; nvec = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- figure example, COO at 100 ----
    for (int i = 0; i < 7; i++) begin
      mem[100 + i] = '{row: fig_row[i] - 1, col: fig_col[i] - 1, val: fig_val[i]};
      exp_q.push_back(mem[100 + i]);
    end
    fmt = FMT_COO; base_a = 100; nnz_a = 7;
    run_and_check("fig COO", 0, 0);
    // the same without an end token: 7 elements, then idle
    begin
      int beats, ends;
      beats = 0; ends = 0;
      no_end = 1; out_ready = 1;
      @(negedge clk); start = 1; @(negedge clk); start = 0; no_end = 0;
      for (int t = 0; t < 20; t++) begin
        @(posedge clk);
        if (out_valid && out_last) ends++;
        else if (out_valid) beats++;
      end
      @(negedge clk);
      checks++;
      if (beats != 7 || ends != 0 || busy) begin failures++; $display("no_end: %0d beats, %0d end tokens, busy %0d", beats, ends, busy); end
    end
    // ---- CSR: pairs at 200, row starts (1,2,4,6 from 1) at 300 ----
    begin
      int rs [4] = '{1, 2, 4, 6};
      for (int i = 0; i < 7; i++) mem[200 + i] = '{row: 0, col: fig_col[i] - 1, val: fig_val[i]};
      for (int r = 0; r < 4; r++) mem[300 + r] = '{row: 0, col: 0, val: rs[r] - 1};
      for (int i = 0; i < 7; i++) exp_q.push_back('{row: fig_row[i] - 1, col: fig_col[i] - 1, val: fig_val[i]});
      fmt = FMT_CSR; base_a = 200; ptr_a = 300; nnz_a = 7; nvec = 4;
      run_and_check("fig CSR", 0, 0);
      checks++;
      if (run_clocks > 7 + 4 + 5) begin failures++; $display("CSR rate: %0d clocks", run_clocks); end
    end
    // ---- CSC: values 21 12 32 42 23 43 34, rows 2 1 3 4 2 4 3, col starts 1 2 5 7 ----
    begin
      int cv [7] = '{21, 12, 32, 42, 23, 43, 34};
      int cr [7] = '{2, 1, 3, 4, 2, 4, 3};
      int cc [7] = '{1, 2, 2, 2, 3, 3, 4};
      int cs [4] = '{1, 2, 5, 7};
      for (int i = 0; i < 7; i++) mem[400 + i] = '{row: cr[i] - 1, col: 0, val: cv[i]};
      for (int c = 0; c < 4; c++) mem[500 + c] = '{row: 0, col: 0, val: cs[c] - 1};
      for (int i = 0; i < 7; i++) exp_q.push_back('{row: cr[i] - 1, col: cc[i] - 1, val: cv[i]});
      fmt = FMT_CSC; base_a = 400; ptr_a = 500; nnz_a = 7; nvec = 4;
      run_and_check("fig CSC", 0, 1);
    end

    // ---- random CSR with vshift=2, voffset=3 ----
    for (int trial = 0; trial < 4; trial++) begin
      int n;
      n = 0;
      for (int r = 0; r < 8; r++) begin
        mem[1000 + r] = '{row: 0, col: 0, val: n};
        for (int c = 0; c < 8; c++) if ($urandom % 3 == 0 && r != 2) begin
          mem[1100 + n] = '{row: 0, col: c, val: r * 100 + c};
          exp_q.push_back('{row: (r << 2) | 3, col: c, val: r * 100 + c});
          n++;
        end
      end
      fmt = FMT_CSR; base_a = 1100; ptr_a = 1000; nnz_a = n; nvec = 8; vshift = 2; voffset = 3;
      run_and_check("random CSR", 0, 1);
    end
    vshift = 0; voffset = 0;

    // ---- PAIR: A CSC at 2000/2100, B CSR at 2200/2300, k = 0..5 ----
    for (int trial = 0; trial < 3; trial++) begin
      int na, nb;
      na = 0; nb = 0;
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
        A[i][j] = ($urandom % 4 == 0) ? 1 + $urandom % 50 : 0;
        B[i][j] = ($urandom % 4 == 0) ? 1 + $urandom % 50 : 0;
      end
      for (int k = 0; k < 6; k++) begin
        mem[2100 + k] = '{row: 0, col: 0, val: na};
        for (int i = 0; i < 8; i++) if (A[i][k] != 0) begin mem[2000 + na] = '{row: i, col: 0, val: A[i][k]}; na++; end
        mem[2300 + k] = '{row: 0, col: 0, val: nb};
        for (int j = 0; j < 8; j++) if (B[k][j] != 0) begin mem[2200 + nb] = '{row: 0, col: j, val: B[k][j]}; nb++; end
      end
      for (int k = 0; k < 6; k++)
        for (int i = 0; i < 8; i++) if (A[i][k] != 0)
          for (int j = 0; j < 8; j++) if (B[k][j] != 0) begin
            exp_q.push_back('{row: i, col: j, val: A[i][k]}); expb_q.push_back(B[k][j]);
          end
      fmt = FMT_PAIR; base_a = 2000; ptr_a = 2100; nnz_a = na; base_b = 2200; ptr_b = 2300; nnz_b = nb; nvec = 6;
      run_and_check("pair", 1, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
