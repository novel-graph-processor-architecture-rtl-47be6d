// node_processor_tb: one node running the local sparse-matrix operations.
//
// The node's network port is looped back to itself (a one-node system).
// Acting as the node controller, the testbench stores two random 16x16
// matrices A and B as CSR over the control bus, then runs:
//   A .+ B, A .- B       reader(A, B) -> sorter -> ALU reduce -> writer CSR
//   A .* B, A ./ B       the same with match_only (intersection)
//   op(k, A) = 3*A       reader -> ALU map with constant -> writer COO
//   CSR -> CSC           reader -> transmit -> receive -> sorter (by column)
//                        -> writer CSC (redistribution through the network)
// and compares every stored result with one computed here.
module node_processor_tb;
  import gp_pkg::*;
  localparam int N = 16;
  localparam int MEMW = 4096;
  localparam int A_D = 0, A_P = 300, B_D = 400, B_P = 700, C_D = 1000, C_P = 1500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cb_sel, cb_we, cb_rvalid, mem_wr_en, inj_valid, inj_ready, ej_valid, ej_ready;
  logic [32:0] cb_addr;
  elem_t cb_wdata, cb_rdata, mem_rd_data, mem_pt_data, mem_wr_data;
  logic [31:0] mem_rd_addr, mem_pt_addr, mem_wr_addr;
  pkt_t inj_pkt, ej_pkt;
  elem_t mem [MEMW];

  assign mem_rd_data = mem[mem_rd_addr % MEMW];
  assign mem_pt_data = mem[mem_pt_addr % MEMW];
  always @(posedge clk) if (mem_wr_en) mem[mem_wr_addr % MEMW] <= mem_wr_data;
  // loop-back network
  assign ej_valid  = inj_valid;
  assign ej_pkt    = inj_pkt;
  assign inj_ready = ej_ready;

  node_processor dut (.clk, .rst_n, .node_id(node_t'(0)), .dest_mask(node_t'(0)), .*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cb_write(bit memory, int addr, elem_t data);
    @(negedge clk);
    cb_sel = 1; cb_we = 1; cb_addr = {memory, 32'(addr)}; cb_wdata = data;
    @(negedge clk);
    cb_sel = 0; cb_we = 0;
  endtask
  task automatic wr(int r, logic [31:0] v);
    cb_write(0, r, '{row: 0, col: 0, val: v});
  endtask
  task automatic rd(bit memory, int r, output elem_t v);
    @(negedge clk);
    cb_sel = 1; cb_we = 0; cb_addr = {memory, 32'(r)};
    @(negedge clk);
    cb_sel = 0;
    v = cb_rdata;
  endtask
  task automatic wait_writer();
    elem_t v;
    int guard;
    guard = 0;
    do begin rd(0, REG_STATUS, v); guard++; end while (!v.val[2] && guard < 5000);
  endtask

  int A [N][N];
  int B [N][N];
  int nA, nB;

  function automatic logic [31:0] route(int alu_src, bit alu_en, int srt_src, bit srt_en,
                                        int tx_src, bit tx_en, int wr_src, bit wr_en);
    return 32'(((alu_en << 2) | alu_src) | (((srt_en << 2) | srt_src) << 4) |
               (((tx_en << 2) | tx_src) << 8) | (((wr_en << 2) | wr_src) << 12));
  endfunction

  function automatic int ref_op(alu_op_e o, int a, int b);
    case (o)
      OP_ADD: return a + b;
      OP_SUB: return a - b;
      OP_MUL: return a * b;
      default: return (b == 0) ? 0 : a / b;
    endcase
  endfunction

  // compare CSR result at C_D/C_P with the expected dense matrix E (0 = absent)
  task automatic check_csr(string what, int E [N][N], bit present [N][N]);
    int p;
    p = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(mem[C_P + i].val) != p) begin failures++; $display("%s: row %0d pointer %0d expected %0d", what, i, mem[C_P + i].val, p); end
      for (int j = 0; j < N; j++) if (present[i][j]) begin
        checks++;
        if (mem[C_D + p] != '{row: 0, col: j, val: E[i][j]}) begin
          failures++;
          if (failures < 10) $display("%s: (%0d,%0d) expected %0d stored %h", what, i, j, E[i][j], mem[C_D + p]);
        end
        p++;
      end
    end
  endtask

  task automatic elementwise(alu_op_e op, bit match_only);
    int E [N][N];
    bit present [N][N];
    elem_t v;
    wr(REG_ROUTE, route(SRC_SORTER, 1, SRC_READER, 1, 0, 0, SRC_ALU, 1));
    wr(REG_ALU, 32'(op) | (1 << 4) | (32'(match_only) << 5));
    wr(REG_MISC, 0);
    wr(REG_WR_FMT, FMT_CSR); wr(REG_WR_BASE, C_D); wr(REG_WR_PTR, C_P); wr(REG_WR_NVEC, N);
    wr(REG_CMD, 2);
    // A without end token, then B
    wr(REG_RD_FMT, 32'(FMT_CSR) | (1 << 16)); wr(REG_RD_BASE_A, A_D); wr(REG_RD_PTR_A, A_P); wr(REG_RD_NNZ_A, nA); wr(REG_RD_NVEC, N);
    wr(REG_CMD, 1);
    do rd(0, REG_STATUS, v); while (v.val[0]);
    wr(REG_RD_FMT, FMT_CSR); wr(REG_RD_BASE_A, B_D); wr(REG_RD_PTR_A, B_P); wr(REG_RD_NNZ_A, nB);
    wr(REG_CMD, 1);
    wait_writer();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      bit a, b;
      a = A[i][j] != 0; b = B[i][j] != 0;
      present[i][j] = match_only ? (a && b) : (a || b);
      E[i][j] = (a && b) ? ref_op(op, A[i][j], B[i][j]) : (a ? A[i][j] : B[i][j]);
    end
    check_csr(op.name(), E, present);
  endtask

  initial begin
    elem_t v;
    cb_sel = 0; cb_we = 0; cb_addr = 0; cb_wdata = '0;
    for (int i = 0; i < MEMW; i++) mem[i] = '0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      int ra, rb;
      ra = $urandom % 4;
      rb = $urandom % 4;
      A[i][j] = (ra == 0) ? int'($urandom % 41) - 20 : 0;
      B[i][j] = (rb == 0) ? int'($urandom % 11) - 5 : 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    nA = 0; nB = 0;
    for (int i = 0; i < N; i++) begin
      cb_write(1, A_P + i, '{row: 0, col: 0, val: nA});
      for (int j = 0; j < N; j++) if (A[i][j] != 0) begin cb_write(1, A_D + nA, '{row: 0, col: j, val: A[i][j]}); nA++; end
      cb_write(1, B_P + i, '{row: 0, col: 0, val: nB});
      for (int j = 0; j < N; j++) if (B[i][j] != 0) begin cb_write(1, B_D + nB, '{row: 0, col: j, val: B[i][j]}); nB++; end
    end
    // memory read back over the control bus
    rd(1, A_D, v);
    checks++; if (v != mem[A_D]) begin failures++; $display("control bus memory read"); end

    elementwise(OP_ADD, 0);
    elementwise(OP_SUB, 0);
    elementwise(OP_MUL, 1);
    elementwise(OP_DIV, 1);

    // op(k, A): 3 * A, written as COO
    begin
      int p;
      wr(REG_ROUTE, route(SRC_READER, 1, 0, 0, 0, 0, SRC_ALU, 1));
      wr(REG_ALU, 32'(OP_MUL) | (1 << 6)); wr(REG_ALU_CONST, 3);
      wr(REG_WR_FMT, FMT_COO); wr(REG_WR_BASE, C_D);
      wr(REG_CMD, 2);
      wr(REG_RD_FMT, FMT_CSR); wr(REG_RD_BASE_A, A_D); wr(REG_RD_PTR_A, A_P); wr(REG_RD_NNZ_A, nA);
      wr(REG_CMD, 1);
      wait_writer();
      p = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) if (A[i][j] != 0) begin
        checks++;
        if (mem[C_D + p] != '{row: i, col: j, val: 3 * A[i][j]}) begin failures++; $display("3*A item %0d: %h", p, mem[C_D + p]); end
        p++;
      end
    end

    // CSR -> CSC through the communication module and the sorter
    begin
      int p;
      wr(REG_ROUTE, route(0, 0, SRC_RX, 1, SRC_READER, 1, SRC_SORTER, 1));
      wr(REG_MISC, 2);                      // sort column-major
      wr(REG_WR_FMT, FMT_CSC); wr(REG_WR_BASE, C_D); wr(REG_WR_PTR, C_P); wr(REG_WR_NVEC, N);
      wr(REG_CMD, 2);
      wr(REG_RD_FMT, FMT_CSR); wr(REG_RD_BASE_A, A_D); wr(REG_RD_PTR_A, A_P); wr(REG_RD_NNZ_A, nA);
      wr(REG_CMD, 1);
      do rd(0, REG_RX_COUNT, v); while (v.val != nA);
      wr(REG_CMD, 4);
      wait_writer();
      p = 0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(mem[C_P + j].val) != p) begin failures++; $display("CSC col %0d pointer %0d expected %0d", j, mem[C_P + j].val, p); end
        for (int i = 0; i < N; i++) if (A[i][j] != 0) begin
          checks++;
          if (mem[C_D + p] != '{row: i, col: 0, val: A[i][j]}) begin failures++; $display("CSC (%0d,%0d): %h", i, j, mem[C_D + p]); end
          p++;
        end
      end
      rd(0, REG_TX_COUNT, v);
      checks++; if (v.val != nA) begin failures++; $display("tx count %0d", v.val); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
