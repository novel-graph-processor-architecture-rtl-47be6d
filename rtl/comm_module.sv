// comm_module: the node's inter-processor communication module.
//
// Transmit side: takes matrix elements or partial products, forms a message
// whose header is the destination node address, protects it with a SECDED
// Hamming code and hands it to the network router. The destination is the
// element's row (or column) index modulo the node count, i.e. a cyclic
// distribution; `dest_mask` is the node count minus one. Outgoing messages
// wait in a small pool of TX_SLOTS slots and the next one to leave is picked
// at a pseudo-random slot (16-bit LFSR), so that successive messages from a
// node go to randomized destinations instead of long runs to one node.
// Receive side: decodes the message, corrects a single-bit error, drops a
// message with a double error and counts both, and outputs the element.
// An end-of-stream token is produced after a pulse on `rx_close`, which the
// controller gives once it knows that all messages have arrived.
//
// The paper gives the function: header with destination address, possible
// error detection/correction bits, decode and correction on receipt, and
// randomized destination order. The slot pool, LFSR, code and mapping are
// this design's choices; message priority is not implemented.
//
// Streams: valid/ready; input end tokens (last=1) are consumed and only
// counted. Timing: one message per clock each way when not back-pressured.
module comm_module
  import gp_pkg::*;
#(
  parameter int unsigned  TX_SLOTS = 16,
  parameter logic [15:0]  SEED     = 16'hACE1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  node_t   node_id,
  input  node_t   dest_mask,
  input  logic    map_col,      // destination from the column index
  // element stream to send
  input  logic    tx_valid,
  output logic    tx_ready,
  input  elem_t   tx_elem,
  input  logic    tx_last,
  // to the network
  output logic    inj_valid,
  input  logic    inj_ready,
  output pkt_t    inj_pkt,
  // from the network
  input  logic    ej_valid,
  output logic    ej_ready,
  input  pkt_t    ej_pkt,
  // received element stream
  output logic    rx_valid,
  input  logic    rx_ready,
  output elem_t   rx_elem,
  output logic    rx_last,
  input  logic    rx_close,
  // status
  output logic    tx_empty,
  output logic [31:0] tx_count,
  output logic [31:0] rx_count,
  output logic [31:0] ecc_corrected,
  output logic [31:0] ecc_dropped
);

  localparam int unsigned SL_W = (TX_SLOTS > 1) ? $clog2(TX_SLOTS) : 1;

  // ---------------- transmit ----------------
  logic  slot_v [TX_SLOTS];
  msg_t  slot_m [TX_SLOTS];
  logic  [15:0] lfsr;
  logic  have_free, have_msg;
  logic  [SL_W-1:0] free_i, send_i;
  msg_t  new_msg;

  always_comb begin
    have_free = 1'b0;
    free_i    = '0;
    for (int i = TX_SLOTS - 1; i >= 0; i--)
      if (!slot_v[i]) begin have_free = 1'b1; free_i = SL_W'(i); end
  end

  // first occupied slot at or after a random start
  always_comb begin
    logic [SL_W-1:0] st;
    have_msg = 1'b0;
    send_i   = '0;
    st       = SL_W'(lfsr % TX_SLOTS);
    for (int i = TX_SLOTS - 1; i >= 0; i--) begin
      int unsigned j;
      j = (int'(st) + i) % TX_SLOTS;
      if (slot_v[j]) begin have_msg = 1'b1; send_i = SL_W'(j); end
    end
  end

  assign new_msg.dest = (map_col ? node_t'(tx_elem.col) : node_t'(tx_elem.row)) & dest_mask;
  assign new_msg.elem = tx_elem;

  assign tx_ready  = have_free || tx_last;
  assign inj_valid = have_msg;
  assign inj_pkt   = '{msg: slot_m[send_i], ecc: ecc_encode(slot_m[send_i])};
  assign tx_empty  = !have_msg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TX_SLOTS; i++) begin slot_v[i] <= 1'b0; slot_m[i] <= '0; end
      lfsr     <= SEED ^ 16'(node_id) ^ 16'(node_id >> 16);
      tx_count <= '0;
    end else begin
      // Galois LFSR, taps 16,14,13,11
      lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
      if (lfsr == '0) lfsr <= 16'h1;
      if (inj_valid && inj_ready) begin
        slot_v[send_i] <= 1'b0;
        tx_count       <= tx_count + 1;
      end
      if (tx_valid && !tx_last && have_free) begin
        slot_v[free_i] <= 1'b1;
        slot_m[free_i] <= new_msg;
      end
    end
  end

  // ---------------- receive ----------------
  ecc_result_t dec;
  logic        close_pend;   // end token requested, not yet sent
  assign dec      = ecc_decode(ej_pkt);
  assign ej_ready = !rx_valid || rx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid      <= 1'b0;
      rx_elem       <= '0;
      rx_last       <= 1'b0;
      rx_count      <= '0;
      ecc_corrected <= '0;
      ecc_dropped   <= '0;
      close_pend    <= 1'b0;
    end else begin
      if (rx_valid && rx_ready) rx_valid <= 1'b0;
      if (ej_valid && ej_ready) begin
        if (dec.corrected)     ecc_corrected <= ecc_corrected + 1;
        if (dec.uncorrectable) ecc_dropped   <= ecc_dropped + 1;
        else begin
          rx_valid <= 1'b1;
          rx_last  <= 1'b0;
          rx_elem  <= dec.msg.elem;
          rx_count <= rx_count + 1;
        end
      end else if (close_pend && ej_ready) begin
        rx_valid   <= 1'b1;
        rx_last    <= 1'b1;
        rx_elem    <= '0;
        close_pend <= 1'b0;
      end
      if (rx_close) close_pend <= 1'b1;
    end
  end

endmodule
