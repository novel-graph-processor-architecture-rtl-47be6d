// gp_system_tb: sparse matrix-matrix multiply C = A +.* B on the whole system.
//
// Runs at the default configuration (8 nodes on a ring, 32-way sorters).
// The testbench plays the global control processor and the node
// controllers: over the global control bus it stores A (by columns, CSC) and
// B (by rows, CSR) spread cyclically over the nodes (column/row k on node
// k mod 8), programs the control registers and sequences the two phases:
//   1. every node forms the outer products of its columns of A and rows of
//      B, multiplies them in the ALU and sends each partial product to the
//      node owning its row of C (row i on node i mod 8); receivers sort.
//   2. after all messages have arrived, the sorted partial products are
//      accumulated by the ALU and written as CSR.
// C is then compared, row by row, with a product computed here. The test
// also requires that the mechanisms of the design all occurred: partial
// products from other nodes, accumulation of matching indices, multi-pass
// merge sorting, network back-pressure, empty rows in the pointer array.
module gp_system_tb;
  import gp_pkg::*;
  localparam int NN   = 8;
  localparam int N    = 64;        // matrix size
  localparam int MEMW = 16384;     // words of node memory modelled
  localparam int A_DATA = 0, A_PTR = 4096, B_DATA = 5000, B_PTR = 9000, C_DATA = 10000, C_PTR = 15000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic gcb_valid, gcb_we, gcb_bcast, gcb_rvalid;
  node_t gcb_node;
  logic [32:0] gcb_addr;
  elem_t gcb_wdata, gcb_rdata;
  logic [31:0] mem_rd_addr [NN], mem_pt_addr [NN], mem_wr_addr [NN];
  elem_t mem_rd_data [NN], mem_pt_data [NN], mem_wr_data [NN];
  logic mem_wr_en [NN];
  logic [31:0] net_fwd_count [NN], net_block_count [NN];

  gp_system dut (.*);

  // node memories (external DDR3 in the prototype): simple word arrays
  elem_t mem [NN][MEMW];
  for (genvar n = 0; n < NN; n++) begin : g_mem
    assign mem_rd_data[n] = mem[n][mem_rd_addr[n] % MEMW];
    assign mem_pt_data[n] = mem[n][mem_pt_addr[n] % MEMW];
    always @(posedge clk) if (mem_wr_en[n]) mem[n][mem_wr_addr[n] % MEMW] <= mem_wr_data[n];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- control bus tasks ----------------
  task automatic cb_write(int node, bit bcast, bit memory, int addr, elem_t data);
    @(negedge clk);
    gcb_valid = 1; gcb_we = 1; gcb_bcast = bcast; gcb_node = node_t'(node);
    gcb_addr = {memory, 32'(addr)}; gcb_wdata = data;
    @(negedge clk);
    gcb_valid = 0; gcb_we = 0; gcb_bcast = 0;
  endtask
  task automatic reg_write(int node, bit bcast, int r, logic [31:0] v);
    cb_write(node, bcast, 0, r, '{row: 0, col: 0, val: v});
  endtask
  task automatic reg_read(int node, int r, output logic [31:0] v);
    @(negedge clk);
    gcb_valid = 1; gcb_we = 0; gcb_bcast = 0; gcb_node = node_t'(node); gcb_addr = {1'b0, 32'(r)};
    @(negedge clk);
    gcb_valid = 0;
    v = gcb_rdata.val;
    if (!gcb_rvalid) begin failures++; $display("no read response"); end
  endtask

  // ---------------- reference matrices ----------------
  int A [N][N];
  int B [N][N];
  int C [N][N];
  int nnzA [NN], nnzB [NN];

  function automatic logic [31:0] route(int alu_src, bit alu_en, int srt_src, bit srt_en,
                                        int tx_src, bit tx_en, int wr_src, bit wr_en);
    return 32'(((alu_en << 2) | alu_src) | (((srt_en << 2) | srt_src) << 4) |
               (((tx_en << 2) | tx_src) << 8) | (((wr_en << 2) | wr_src) << 12));
  endfunction

  int ph1_clocks, ph2_clocks;
  int mech_remote = 0, mech_accum = 0, mech_multipass = 0, mech_block = 0, mech_empty_row = 0;

  initial begin
    logic [31:0] v;
    int t0;
    gcb_valid = 0; gcb_we = 0; gcb_bcast = 0; gcb_node = 0; gcb_addr = 0; gcb_wdata = '0;
    for (int n = 0; n < NN; n++) for (int i = 0; i < MEMW; i++) mem[n][i] = '0;
    // random sparse A and B, about 4 per row; row 5 of A is empty so C row 5 is empty
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      A[i][j] = (i != 5 && $urandom % 16 == 0) ? 1 + $urandom % 9 : 0;
      B[i][j] = ($urandom % 16 == 0) ? 1 + $urandom % 9 : 0;
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < N; k++) C[i][j] += A[i][k] * B[k][j];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- load A (CSC) and B (CSR) through the control bus ----
    for (int n = 0; n < NN; n++) begin
      int na, nb;
      na = 0; nb = 0;
      for (int kl = 0; kl < N / NN; kl++) begin
        int k;
        k = kl * NN + n;
        cb_write(n, 0, 1, A_PTR + kl, '{row: 0, col: 0, val: na});
        for (int i = 0; i < N; i++) if (A[i][k] != 0) begin
          cb_write(n, 0, 1, A_DATA + na, '{row: i, col: 0, val: A[i][k]}); na++;
        end
        cb_write(n, 0, 1, B_PTR + kl, '{row: 0, col: 0, val: nb});
        for (int j = 0; j < N; j++) if (B[k][j] != 0) begin
          cb_write(n, 0, 1, B_DATA + nb, '{row: 0, col: j, val: B[k][j]}); nb++;
        end
      end
      nnzA[n] = na; nnzB[n] = nb;
      reg_write(n, 0, REG_RD_NNZ_A, na);
      reg_write(n, 0, REG_RD_NNZ_B, nb);
    end

    // ---- phase 1: products to their owners ----
    reg_write(0, 1, REG_ROUTE, route(SRC_READER, 1, SRC_RX, 1, SRC_ALU, 1, 0, 0));
    reg_write(0, 1, REG_RD_FMT, 32'(FMT_PAIR) | (3 << 8));
    reg_write(0, 1, REG_RD_BASE_A, A_DATA);
    reg_write(0, 1, REG_RD_PTR_A, A_PTR);
    reg_write(0, 1, REG_RD_BASE_B, B_DATA);
    reg_write(0, 1, REG_RD_PTR_B, B_PTR);
    reg_write(0, 1, REG_RD_NVEC, N / NN);
    reg_write(0, 1, REG_ALU, 32'(OP_MUL));
    reg_write(0, 1, REG_MISC, 0);
    t0 = $time / 10;
    reg_write(0, 1, REG_CMD, 1);            // all readers start
    // wait until all readers are idle, all pools empty and sent == received
    forever begin
      int sent, recv; bit idle;
      sent = 0; recv = 0; idle = 1;
      for (int n = 0; n < NN; n++) begin
        reg_read(n, REG_STATUS, v);
        if (v[0] || !v[5]) idle = 0;
        reg_read(n, REG_TX_COUNT, v); sent += v;
        reg_read(n, REG_RX_COUNT, v); recv += v;
      end
      if (idle && sent == recv) break;
    end
    ph1_clocks = $time / 10 - t0;

    // ---- phase 2: sort, accumulate, write C as CSR ----
    t0 = $time / 10;
    reg_write(0, 1, REG_ROUTE, route(SRC_SORTER, 1, SRC_RX, 1, 0, 0, SRC_ALU, 1));
    reg_write(0, 1, REG_ALU, 32'(OP_ADD) | (1 << 4));
    reg_write(0, 1, REG_WR_FMT, 32'(FMT_CSR) | (3 << 8));
    reg_write(0, 1, REG_WR_BASE, C_DATA);
    reg_write(0, 1, REG_WR_PTR, C_PTR);
    reg_write(0, 1, REG_WR_NVEC, N / NN);
    reg_write(0, 1, REG_CMD, 2);            // writers start
    reg_write(0, 1, REG_CMD, 4);            // end of received stream
    for (int n = 0; n < NN; n++) begin
      do reg_read(n, REG_STATUS, v); while (!v[2]);
    end
    ph2_clocks = $time / 10 - t0;

    // ---- check C and count mechanisms ----
    for (int n = 0; n < NN; n++) begin
      int p;
      logic [31:0] rx, mt, nz;
      reg_read(n, REG_RX_COUNT, rx);
      reg_read(n, REG_MATCHES, mt);
      reg_read(n, REG_WR_NNZ, nz);
      reg_read(n, REG_STATUS, v);
      checks++;
      if (v[4] || v[6]) begin failures++; $display("node %0d: sorter overflow or writer range error", n); end
      if (rx > 32) mech_multipass++;
      if (mt > 0) mech_accum++;
      if (net_block_count[n] > 0) mech_block++;
      if (net_fwd_count[n] > 0) mech_remote++;
      p = 0;
      for (int il = 0; il < N / NN; il++) begin
        int i, start;
        i = il * NN + n;
        start = int'(mem[n][C_PTR + il].val);
        checks++;
        if (start != p) begin failures++; $display("node %0d row %0d: pointer %0d expected %0d", n, i, start, p); end
        if (il > 0 && start == int'(mem[n][C_PTR + il - 1].val) && i - NN == 5) mech_empty_row++;
        for (int j = 0; j < N; j++) if (C[i][j] != 0) begin
          checks++;
          if (mem[n][C_DATA + p] != '{row: 0, col: j, val: C[i][j]}) begin
            failures++;
            if (failures < 10) $display("C(%0d,%0d)=%0d stored %h", i, j, C[i][j], mem[n][C_DATA + p]);
          end
          p++;
        end
      end
      checks++;
      if (nz != p) begin failures++; $display("node %0d: %0d elements written, expected %0d", n, nz, p); end
    end
    $display("phase 1 (products, network): %0d clocks; phase 2 (sort, accumulate, write): %0d clocks", ph1_clocks, ph2_clocks);
    $display("mechanisms: remote %0d, accumulate %0d, multipass sort %0d, backpressure %0d, empty row %0d",
             mech_remote, mech_accum, mech_multipass, mech_block, mech_empty_row);
    checks++; if (mech_remote == 0)    begin failures++; $display("no message crossed the network"); end
    checks++; if (mech_accum == 0)     begin failures++; $display("no partial products were accumulated"); end
    checks++; if (mech_multipass == 0) begin failures++; $display("no sort needed more than one pass"); end
    checks++; if (mech_block == 0)     begin failures++; $display("the network never back-pressured"); end
    checks++; if (mech_empty_row == 0) begin failures++; $display("no empty row was written"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
