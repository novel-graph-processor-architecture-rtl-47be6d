// gp_pkg: types and helper functions shared by the graph processor node.
//
// A sparse matrix element travels between the accelerator modules in
// coordinate form: a data value with its row and column index. The
// operator set follows the sparse-matrix instruction set (Table I style
// kernels with the element operator replaceable by min, max, AND, OR, XOR).
// Field widths, the operator encoding, the memory word layout and the packet
// layout are choices of this design; the paper gives none of them.
package gp_pkg;

  parameter int unsigned IDX_W = 32;  // row / column index width
  parameter int unsigned VAL_W = 32;  // element data width

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [VAL_W-1:0] val_t;

  // One matrix element or partial product in coordinate (tuple) form.
  // It is also the word of node memory: CSR keeps (val, col) pairs with row
  // zero, CSC keeps (val, row) pairs with col zero, COO keeps all three, and
  // pointer arrays keep the start address in val.
  typedef struct packed {
    idx_t row;
    idx_t col;
    val_t val;
  } elem_t;

  localparam int unsigned ELEM_W = $bits(elem_t);

  // Element-level operators.
  typedef enum logic [3:0] {
    OP_ADD  = 4'd0,
    OP_SUB  = 4'd1,
    OP_MUL  = 4'd2,
    OP_DIV  = 4'd3,
    OP_MIN  = 4'd4,
    OP_MAX  = 4'd5,
    OP_AND  = 4'd6,
    OP_OR   = 4'd7,
    OP_XOR  = 4'd8,
    OP_FST  = 4'd9,   // keep the first operand
    OP_SND  = 4'd10   // keep the second operand
  } alu_op_e;

  // Storage formats of Fig. 5.
  typedef enum logic [1:0] {
    FMT_COO  = 2'd0,
    FMT_CSR  = 2'd1,
    FMT_CSC  = 2'd2,
    FMT_PAIR = 2'd3   // reader only: outer products of a CSC and a CSR matrix
  } fmt_e;

  // Sources on the node's local bus.
  typedef enum logic [1:0] {
    SRC_READER = 2'd0,
    SRC_SORTER = 2'd1,
    SRC_ALU    = 2'd2,
    SRC_RX     = 2'd3
  } src_e;

  // ---------------------------------------------------------------------
  // Communication message: destination node address, then the element in
  // coordinate form, protected by a SECDED Hamming code. Node addresses are
  // NODE_W bits wide, enough for a network of up to 2^20 (about one million)
  // nodes.
  parameter int unsigned NODE_W = 20;
  typedef logic [NODE_W-1:0] node_t;

  typedef struct packed {
    node_t dest;
    elem_t elem;
  } msg_t;

  localparam int unsigned MSG_W = $bits(msg_t);
  // Hamming check bits r with 2^r >= MSG_W + r + 1, plus one overall parity
  localparam int unsigned HAM_R = 7;
  localparam int unsigned ECC_W = HAM_R + 1;

  typedef struct packed {
    msg_t             msg;
    logic [ECC_W-1:0] ecc;
  } pkt_t;

  // Hamming position (1-based, powers of two skipped) of message bit d.
  function automatic int unsigned ham_pos(int unsigned d);
    int unsigned p = d + 1;
    for (int unsigned r = 0; r < HAM_R + 1; r++)
      if (p >= (1 << r)) p++;
    return p;
  endfunction

  // Message bits covered by each Hamming check bit, fixed at elaboration.
  // Mask of check bit i is HAM_MASK[i*MSG_W +: MSG_W].
  function automatic logic [HAM_R*MSG_W-1:0] ham_masks();
    logic [HAM_R*MSG_W-1:0] m = '0;
    for (int unsigned i = 0; i < HAM_R; i++)
      for (int unsigned d = 0; d < MSG_W; d++) m[i*MSG_W+d] = ((ham_pos(d) >> i) & 1) != 0;
    return m;
  endfunction
  localparam logic [HAM_R*MSG_W-1:0] HAM_MASK = ham_masks();

  function automatic logic [ECC_W-1:0] ecc_encode(msg_t m);
    logic [HAM_R-1:0] c;
    for (int unsigned i = 0; i < HAM_R; i++) c[i] = ^(m & HAM_MASK[i*MSG_W +: MSG_W]);
    return {(^m) ^ (^c), c};
  endfunction

  // Corrects a single-bit error anywhere in the packet; flags double errors.
  typedef struct packed {
    msg_t msg;
    logic corrected;
    logic uncorrectable;
  } ecc_result_t;

  function automatic ecc_result_t ecc_decode(pkt_t p);
    ecc_result_t      r;
    logic [HAM_R-1:0] syn;
    logic             par;
    for (int unsigned i = 0; i < HAM_R; i++) syn[i] = ^(p.msg & HAM_MASK[i*MSG_W +: MSG_W]) ^ p.ecc[i];
    par = (^p.msg) ^ (^p.ecc);
    r.msg           = p.msg;
    r.corrected     = 1'b0;
    r.uncorrectable = 1'b0;
    if (syn != '0 && par) begin
      for (int unsigned d = 0; d < MSG_W; d++)
        if (ham_pos(d) == 32'(syn)) r.msg[d] = !p.msg[d];
      r.corrected = 1'b1;
    end else if (syn != '0) begin
      r.uncorrectable = 1'b1;
    end else if (par) begin
      r.corrected = 1'b1;   // the overall parity bit itself was hit
    end
    return r;
  endfunction

  // ---------------------------------------------------------------------
  // Node control registers, addressed by word on the control bus (region 0;
  // region 1 is node memory). Written by the controller before an operation
  // and kept stable while the modules they configure are busy.
  localparam int unsigned REG_CMD       = 0;   // pulses: b0 reader start, b1 writer start, b2 rx end token
  localparam int unsigned REG_ROUTE     = 1;   // local bus: per sink {enable, source}
  localparam int unsigned REG_RD_FMT    = 2;   // [1:0] fmt, [12:8] vshift, [16] no end token
  localparam int unsigned REG_RD_BASE_A = 3;
  localparam int unsigned REG_RD_PTR_A  = 4;
  localparam int unsigned REG_RD_NNZ_A  = 5;
  localparam int unsigned REG_RD_BASE_B = 6;
  localparam int unsigned REG_RD_PTR_B  = 7;
  localparam int unsigned REG_RD_NNZ_B  = 8;
  localparam int unsigned REG_RD_NVEC   = 9;
  localparam int unsigned REG_ALU       = 10;  // [3:0] op, [4] reduce, [5] match_only, [6] constant operand
  localparam int unsigned REG_ALU_CONST = 11;
  localparam int unsigned REG_WR_FMT    = 12;  // [1:0] fmt, [12:8] vshift
  localparam int unsigned REG_WR_BASE   = 13;
  localparam int unsigned REG_WR_PTR    = 14;
  localparam int unsigned REG_WR_NVEC   = 15;
  localparam int unsigned REG_MISC      = 16;  // [0] destination by column, [1] sort column-major
  localparam int unsigned NUM_CFG_REGS  = 17;
  // read-only status
  localparam int unsigned REG_STATUS    = 20;  // b0 reader busy, b1 writer busy, b2 writer done,
                                               // b3 sorter busy, b4 sorter overflow, b5 tx empty,
                                               // b6 writer range error
  localparam int unsigned REG_TX_COUNT  = 21;
  localparam int unsigned REG_RX_COUNT  = 22;
  localparam int unsigned REG_WR_NNZ    = 23;
  localparam int unsigned REG_ECC_CORR  = 24;
  localparam int unsigned REG_ECC_DROP  = 25;
  localparam int unsigned REG_MATCHES   = 26;

  // REG_ROUTE fields: sink s (0 ALU, 1 sorter, 2 tx, 3 writer) at bits
  // [4s+1:4s] = source (src_e), bit 4s+2 = enable.
  localparam int unsigned SINK_ALU = 0, SINK_SORTER = 1, SINK_TX = 2, SINK_WRITER = 3;

  // ---------------------------------------------------------------------
  // Signed arithmetic on element values. Division by zero gives zero.
  function automatic val_t alu_apply(alu_op_e op, val_t a, val_t b);
    logic signed [VAL_W-1:0] sa, sb;
    sa = a;
    sb = b;
    unique case (op)
      OP_ADD: return a + b;
      OP_SUB: return a - b;
      OP_MUL: return a * b;
      OP_DIV: return (b == '0) ? '0 : val_t'(sa / sb);
      OP_MIN: return (sa < sb) ? a : b;
      OP_MAX: return (sa > sb) ? a : b;
      OP_AND: return a & b;
      OP_OR:  return a | b;
      OP_XOR: return a ^ b;
      OP_FST: return a;
      OP_SND: return b;
      default: return a;
    endcase
  endfunction

  // Sort key: row-major ({row,col}) or column-major ({col,row}).
  function automatic logic [2*IDX_W-1:0] sort_key(elem_t e, logic col_major);
    return col_major ? {e.col, e.row} : {e.row, e.col};
  endfunction

endpackage
