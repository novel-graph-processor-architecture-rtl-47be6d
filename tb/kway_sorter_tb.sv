// kway_sorter_tb: sorts random element blocks and checks order and timing.
//
// Two sorters are exercised: a 4-way one with a 64-entry buffer (many passes,
// overflow) and one at the default 32 ways and 1024 entries. Each block is
// compared with a stable reference sort done here, row-major or column-major,
// and the clocks from the end token to the first sorted element must match
// the pass-by-pass count derived from the k-way merge schedule.
module kway_sorter_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DUT 0: K=4, DEPTH=64 ; DUT 1: defaults
  logic  in_valid [2], in_ready [2], in_last [2], out_valid [2], out_ready [2], out_last [2], busy [2], ovf [2];
  elem_t in_elem [2], out_elem [2];
  logic  colm;

  kway_sorter #(.K(4), .DEPTH(64)) d0 (.clk, .rst_n, .col_major(colm),
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_elem(in_elem[0]), .in_last(in_last[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_elem(out_elem[0]), .out_last(out_last[0]),
    .busy(busy[0]), .overflow(ovf[0]));
  kway_sorter d1 (.clk, .rst_n, .col_major(colm),
    .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_elem(in_elem[1]), .in_last(in_last[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_elem(out_elem[1]), .out_last(out_last[1]),
    .busy(busy[1]), .overflow(ovf[1]));

  // expected sort clocks from the end token (accepted) to first out_valid
  function automatic int exp_cycles(int n, int k);
    int c = 1;             // S_PASS decision at the end
    int L = 1;
    while (L < n) begin
      c += 1;              // S_PASS starting this pass
      for (int g = 0; g < n; g += k * L) begin
        int r = 0, s = 0;
        for (int j = 0; j < k; j++) begin
          int st = g + j * L;
          if (st < n) begin r++; s += ((st + L < n) ? L : n - st); end
        end
        c += r + ((r < k) ? 1 : 0) + s + 1;
      end
      L *= k;
    end
    return c;
  endfunction

  task automatic run_block(int d, int n, int k, int depth, bit cm, bit stall);
    elem_t src [$];
    logic [79:0] keyed [$];
    elem_t got [$];
    int t0, t1, nk, ec;
    for (int i = 0; i < n; i++) begin
      elem_t e;
      e.row = 32'($urandom % 13);
      e.col = 32'($urandom % 11);
      e.val = $urandom;
      src.push_back(e);
    end
    nk = (n < depth) ? n : depth;
    for (int i = 0; i < nk; i++)
      keyed.push_back({cm ? {src[i].col[31:0], src[i].row[31:0]} : {src[i].row, src[i].col}, 16'(i)});
    keyed.sort();
    colm = cm;
    @(negedge clk);
    for (int i = 0; i <= n; i++) begin
      in_valid[d] = 1; in_last[d] = (i == n); in_elem[d] = (i < n) ? src[i] : '0;
      @(posedge clk);
      while (!in_ready[d]) @(posedge clk);
      @(negedge clk);
    end
    in_valid[d] = 0; in_last[d] = 0;
    t0 = $time / 10;
    while (!out_valid[d]) @(negedge clk);
    t1 = $time / 10;
    ec = exp_cycles(nk, k);
    checks++;
    if (t1 - t0 != ec) begin
      failures++;
      $display("dut%0d n=%0d sort clocks %0d expected %0d", d, nk, t1 - t0, ec);
    end
    // collect
    forever begin
      out_ready[d] = stall ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (out_valid[d] && out_ready[d]) begin
        if (out_last[d]) break;
        got.push_back(out_elem[d]);
      end
      @(negedge clk);
    end
    @(negedge clk);
    out_ready[d] = 0;
    checks++;
    if (got.size() != nk) begin failures++; $display("dut%0d count %0d expected %0d", d, got.size(), nk); end
    for (int i = 0; i < nk && i < got.size(); i++) begin
      elem_t e;
      int oi;
      oi = int'(keyed[i][15:0]);
      e = src[oi];
      checks++;
      if (got[i] != e) begin
        failures++;
        if (failures < 10) $display("dut%0d pos %0d got %h exp %h", d, i, got[i], e);
      end
    end
    checks++;
    if (ovf[d] != (n > depth)) begin failures++; $display("dut%0d overflow flag %0d", d, ovf[d]); end
  endtask

  initial begin
    for (int d = 0; d < 2; d++) begin in_valid[d] = 0; in_last[d] = 0; out_ready[d] = 0; in_elem[d] = '0; end
    colm = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_block(0, 0, 4, 64, 0, 0);
    run_block(0, 1, 4, 64, 0, 0);
    run_block(0, 5, 4, 64, 1, 0);
    run_block(0, 17, 4, 64, 0, 1);
    run_block(0, 64, 4, 64, 1, 1);
    run_block(1, 300, 32, 1024, 0, 0);
    run_block(1, 1024, 32, 1024, 1, 0);
    // overflow last: the flag is sticky
    run_block(0, 70, 4, 64, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
