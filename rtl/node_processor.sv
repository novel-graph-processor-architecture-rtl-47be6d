// node_processor: one graph processor node built from accelerator modules.
//
// The node does sparse-matrix work with specialised modules instead of a
// CPU: matrix reader, matrix writer, k-way systolic merge sorter, streaming
// ALU and the communication module, all joined by a local bus. The bus here
// is a stream switch: each sink (ALU, sorter, communication transmit, matrix
// writer) takes its input from one selected source (reader, sorter, ALU,
// communication receive), so several modules work at once as a pipeline,
// one element per clock. Control registers, loaded over the control bus
// before an operation, set formats, addresses, operators, the switch and
// the distribution mapping; the node controller that sequences the
// operation (a conventional microprocessor in the architecture) is outside
// this module and drives the control bus.
//
// Example, C = A +.* B with A by columns and B by rows, C by rows:
//  phase 1: reader (PAIR) -> ALU (MAP, MUL) -> transmit;  receive -> sorter
//  phase 2: sorter -> ALU (REDUCE, ADD) -> writer (CSR)
// Between the phases the controller waits until every message sent has been
// received across all nodes, then pulses the receive end token.
//
// Follows the paper: the module set of the node figure, streaming
// operation, no cache, control registers loaded over a local control bus.
// This design's choices: the stream switch, the register map in gp_pkg,
// node memory outside the node (DDR3 in the prototype) with two read ports
// and one write port, and control-bus access to memory when the reader and
// writer are idle. A sink may be enabled on only one source at a time and a
// source should feed only one enabled sink.
//
// Control bus: cb_sel/cb_we with word address cb_addr; cb_addr[ADDR_W]
// selects memory (1) or registers (0). Read data returns one clock later
// on cb_rdata with cb_rvalid.
module node_processor
  import gp_pkg::*;
#(
  parameter int unsigned K          = 32,
  parameter int unsigned SORT_DEPTH = 1024,
  parameter int unsigned TX_SLOTS   = 16,
  parameter int unsigned ADDR_W     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  node_t             node_id,
  input  node_t             dest_mask,
  // control bus
  input  logic              cb_sel,
  input  logic              cb_we,
  input  logic [ADDR_W:0]   cb_addr,
  input  elem_t             cb_wdata,
  output elem_t             cb_rdata,
  output logic              cb_rvalid,
  // node memory
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  elem_t             mem_rd_data,
  output logic [ADDR_W-1:0] mem_pt_addr,
  input  elem_t             mem_pt_data,
  output logic              mem_wr_en,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output elem_t             mem_wr_data,
  // network (router local port)
  output logic              inj_valid,
  input  logic              inj_ready,
  output pkt_t              inj_pkt,
  input  logic              ej_valid,
  output logic              ej_ready,
  input  pkt_t              ej_pkt
);

  // ---------------- control registers ----------------
  logic [31:0] cfg [NUM_CFG_REGS];
  logic        reg_wr, mem_acc;
  logic [31:0] cmd;

  assign mem_acc = cb_addr[ADDR_W];
  assign reg_wr  = cb_sel && cb_we && !mem_acc;
  assign cmd     = (reg_wr && cb_addr[ADDR_W-1:0] == ADDR_W'(REG_CMD)) ? cb_wdata.val : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CFG_REGS; i++) cfg[i] <= '0;
    end else if (reg_wr && cb_addr[ADDR_W-1:0] < ADDR_W'(NUM_CFG_REGS) && cb_addr[ADDR_W-1:0] != ADDR_W'(REG_CMD)) begin
      cfg[cb_addr[$clog2(NUM_CFG_REGS)-1:0]] <= cb_wdata.val;
    end
  end

  // ---------------- module signals ----------------
  // sources
  logic  src_v [4], src_l [4];
  elem_t src_d [4];
  val_t  rd_b;
  // sinks
  logic  snk_v [4], snk_l [4];
  logic  snk_r_alu, snk_r_sorter, snk_r_tx, snk_r_writer;
  elem_t snk_e [4];
  src_e  snk_src [4];
  logic  snk_en [4];

  for (genvar s = 0; s < 4; s++) begin : g_sink
    assign snk_src[s] = src_e'(cfg[REG_ROUTE][4*s +: 2]);
    assign snk_en[s]  = cfg[REG_ROUTE][4*s + 2];
    assign snk_v[s]   = snk_en[s] && src_v[snk_src[s]];
    assign snk_e[s]   = src_d[snk_src[s]];
    assign snk_l[s]   = src_l[snk_src[s]];
  end

  // A source may go on when an enabled sink that selects it takes the beat.
  // A module never feeds itself (that would be a combinational loop), so
  // the ALU and sorter outputs ignore their own sinks.
  logic [3:0] sel_hit [4];   // [source][sink]
  for (genvar src = 0; src < 4; src++) begin : g_src
    for (genvar s = 0; s < 4; s++) begin : g_hit
      assign sel_hit[src][s] = snk_en[s] && snk_src[s] == src_e'(src);
    end
  end

  logic rdy_reader, rdy_sorter, rdy_alu, rdy_rx;
  assign rdy_reader = (sel_hit[SRC_READER][SINK_ALU] && snk_r_alu) || (sel_hit[SRC_READER][SINK_SORTER] && snk_r_sorter)
                   || (sel_hit[SRC_READER][SINK_TX] && snk_r_tx)   || (sel_hit[SRC_READER][SINK_WRITER] && snk_r_writer);
  assign rdy_sorter = (sel_hit[SRC_SORTER][SINK_ALU] && snk_r_alu)
                   || (sel_hit[SRC_SORTER][SINK_TX] && snk_r_tx)   || (sel_hit[SRC_SORTER][SINK_WRITER] && snk_r_writer);
  assign rdy_alu    = (sel_hit[SRC_ALU][SINK_SORTER] && snk_r_sorter)
                   || (sel_hit[SRC_ALU][SINK_TX] && snk_r_tx)      || (sel_hit[SRC_ALU][SINK_WRITER] && snk_r_writer);
  assign rdy_rx     = (sel_hit[SRC_RX][SINK_ALU] && snk_r_alu)     || (sel_hit[SRC_RX][SINK_SORTER] && snk_r_sorter)
                   || (sel_hit[SRC_RX][SINK_TX] && snk_r_tx)       || (sel_hit[SRC_RX][SINK_WRITER] && snk_r_writer);

  // ---------------- matrix reader ----------------
  logic        rd_busy;
  logic [ADDR_W-1:0] rd_pt_addr;
  matrix_reader #(.ADDR_W(ADDR_W)) u_reader (
    .clk, .rst_n,
    .start   (cmd[0]),
    .fmt     (fmt_e'(cfg[REG_RD_FMT][1:0])),
    .base_a  (ADDR_W'(cfg[REG_RD_BASE_A])),
    .ptr_a   (ADDR_W'(cfg[REG_RD_PTR_A])),
    .nnz_a   (ADDR_W'(cfg[REG_RD_NNZ_A])),
    .base_b  (ADDR_W'(cfg[REG_RD_BASE_B])),
    .ptr_b   (ADDR_W'(cfg[REG_RD_PTR_B])),
    .nnz_b   (ADDR_W'(cfg[REG_RD_NNZ_B])),
    .nvec    (ADDR_W'(cfg[REG_RD_NVEC])),
    .vshift  (cfg[REG_RD_FMT][12:8]),
    .voffset (idx_t'(node_id)),
    .no_end  (cfg[REG_RD_FMT][16]),
    .busy    (rd_busy),
    .rd_addr (mem_rd_addr),
    .rd_data (mem_rd_data),
    .pt_addr (rd_pt_addr),
    .pt_data (mem_pt_data),
    .out_valid(src_v[SRC_READER]),
    .out_ready(rdy_reader),
    .out_elem (src_d[SRC_READER]),
    .out_b    (rd_b),
    .out_last (src_l[SRC_READER])
  );

  // ---------------- ALU ----------------
  logic [31:0] alu_matches;
  stream_alu u_alu (
    .clk, .rst_n,
    .mode_reduce (cfg[REG_ALU][4]),
    .op          (alu_op_e'(cfg[REG_ALU][3:0])),
    .match_only  (cfg[REG_ALU][5]),
    .in_valid    (snk_v[SINK_ALU]),
    .in_ready    (snk_r_alu),
    .in_elem     (snk_e[SINK_ALU]),
    .in_b        ((cfg[REG_ALU][6] || snk_src[SINK_ALU] != SRC_READER) ? cfg[REG_ALU_CONST] : rd_b),
    .in_last     (snk_l[SINK_ALU]),
    .out_valid   (src_v[SRC_ALU]),
    .out_ready   (rdy_alu),
    .out_elem    (src_d[SRC_ALU]),
    .out_last    (src_l[SRC_ALU]),
    .match_count (alu_matches)
  );

  // ---------------- sorter ----------------
  logic srt_busy, srt_ovf;
  kway_sorter #(.K(K), .DEPTH(SORT_DEPTH)) u_sorter (
    .clk, .rst_n,
    .col_major (cfg[REG_MISC][1]),
    .in_valid  (snk_v[SINK_SORTER]),
    .in_ready  (snk_r_sorter),
    .in_elem   (snk_e[SINK_SORTER]),
    .in_last   (snk_l[SINK_SORTER]),
    .out_valid (src_v[SRC_SORTER]),
    .out_ready (rdy_sorter),
    .out_elem  (src_d[SRC_SORTER]),
    .out_last  (src_l[SRC_SORTER]),
    .busy      (srt_busy),
    .overflow  (srt_ovf)
  );

  // ---------------- communication ----------------
  logic        tx_empty;
  logic [31:0] tx_count, rx_count, ecc_corr, ecc_drop;
  comm_module #(.TX_SLOTS(TX_SLOTS)) u_comm (
    .clk, .rst_n, .node_id, .dest_mask,
    .map_col   (cfg[REG_MISC][0]),
    .tx_valid  (snk_v[SINK_TX]),
    .tx_ready  (snk_r_tx),
    .tx_elem   (snk_e[SINK_TX]),
    .tx_last   (snk_l[SINK_TX]),
    .inj_valid, .inj_ready, .inj_pkt,
    .ej_valid, .ej_ready, .ej_pkt,
    .rx_valid  (src_v[SRC_RX]),
    .rx_ready  (rdy_rx),
    .rx_elem   (src_d[SRC_RX]),
    .rx_last   (src_l[SRC_RX]),
    .rx_close  (cmd[2]),
    .tx_empty,
    .tx_count, .rx_count,
    .ecc_corrected (ecc_corr),
    .ecc_dropped   (ecc_drop)
  );

  // ---------------- matrix writer ----------------
  logic              wr_busy, wr_done, wr_rerr, wr_en_w;
  logic [ADDR_W-1:0] wr_nnz, wr_addr_w;
  elem_t             wr_data_w;
  matrix_writer #(.ADDR_W(ADDR_W)) u_writer (
    .clk, .rst_n,
    .start     (cmd[1]),
    .fmt       (fmt_e'(cfg[REG_WR_FMT][1:0])),
    .base_data (ADDR_W'(cfg[REG_WR_BASE])),
    .base_ptr  (ADDR_W'(cfg[REG_WR_PTR])),
    .nvec      (ADDR_W'(cfg[REG_WR_NVEC])),
    .vshift    (cfg[REG_WR_FMT][12:8]),
    .busy      (wr_busy),
    .done      (wr_done),
    .nnz       (wr_nnz),
    .range_err (wr_rerr),
    .in_valid  (snk_v[SINK_WRITER]),
    .in_ready  (snk_r_writer),
    .in_elem   (snk_e[SINK_WRITER]),
    .in_last   (snk_l[SINK_WRITER]),
    .wr_en     (wr_en_w),
    .wr_addr   (wr_addr_w),
    .wr_data   (wr_data_w)
  );

  // ---------------- memory port sharing ----------------
  // The writer owns the write port while it writes; otherwise the control
  // bus may write. The reader owns the pointer port while busy; otherwise
  // the control bus reads through it.
  assign mem_wr_en   = wr_en_w || (cb_sel && cb_we && mem_acc && !wr_en_w);
  assign mem_wr_addr = wr_en_w ? wr_addr_w : cb_addr[ADDR_W-1:0];
  assign mem_wr_data = wr_en_w ? wr_data_w : cb_wdata;
  assign mem_pt_addr = rd_busy ? rd_pt_addr : cb_addr[ADDR_W-1:0];

  // ---------------- control bus read ----------------
  logic [31:0] status;
  assign status = {25'd0, wr_rerr, tx_empty, srt_ovf, srt_busy, wr_done, wr_busy, rd_busy};

  function automatic logic [31:0] reg_read(logic [ADDR_W-1:0] a);
    unique case (int'(a))
      REG_STATUS:   return status;
      REG_TX_COUNT: return tx_count;
      REG_RX_COUNT: return rx_count;
      REG_WR_NNZ:   return 32'(wr_nnz);
      REG_ECC_CORR: return ecc_corr;
      REG_ECC_DROP: return ecc_drop;
      REG_MATCHES:  return alu_matches;
      default:      return (a < ADDR_W'(NUM_CFG_REGS)) ? cfg[a[$clog2(NUM_CFG_REGS)-1:0]] : '0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cb_rdata  <= '0;
      cb_rvalid <= 1'b0;
    end else begin
      cb_rvalid <= cb_sel && !cb_we;
      if (cb_sel && !cb_we)
        cb_rdata <= mem_acc ? mem_pt_data : '{row: '0, col: '0, val: reg_read(cb_addr[ADDR_W-1:0])};
    end
  end

endmodule
