// comm_module_tb: loops the transmit side back into the receive side.
//
// 300 random elements are sent with an 8-node mask. Each message leaving the
// transmitter is checked for the destination (row or column index modulo 8,
// computed here), then passed to the receiver unchanged, with one flipped
// bit, or with two flipped bits. The receiver must deliver every message
// with at most one flipped bit intact, drop the double-error ones, and count
// both kinds. The send order must differ from the arrival order (randomized
// destinations), and rx_close must end the received stream.
module comm_module_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  node_t node_id, dest_mask;
  logic map_col, tx_valid, tx_ready, tx_last, inj_valid, inj_ready, ej_valid, ej_ready;
  logic rx_valid, rx_ready, rx_last, rx_close, tx_empty;
  elem_t tx_elem, rx_elem;
  pkt_t inj_pkt, ej_pkt;
  logic [31:0] tx_count, rx_count, ecc_corrected, ecc_dropped;

  comm_module dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t  chan [$];
  int    expect_cnt [elem_t];
  int    n_single = 0, n_double = 0, reordered = 0, n_sent = 0;
  elem_t sent_order [$];
  int    got_last = 0, n_got = 0;

  // network side: take injected messages, corrupt some, queue them
  always @(posedge clk) if (rst_n) begin
    if (inj_valid && inj_ready) begin
      pkt_t p; int r; node_t want;
      p = inj_pkt;
      want = (map_col ? node_t'(p.msg.elem.col) : node_t'(p.msg.elem.row)) & node_t'(7);
      checks++;
      if (p.msg.dest != want) begin failures++; $display("dest %0d expected %0d", p.msg.dest, want); end
      if (n_sent < sent_order.size() && p.msg.elem != sent_order[n_sent]) reordered++;
      n_sent++;
      r = $urandom % 20;
      if (r < 3) begin
        int b0;
        b0 = $urandom % $bits(pkt_t);
        p[b0] = !p[b0]; n_single++;
        expect_cnt[inj_pkt.msg.elem]++;
      end else if (r == 3) begin
        int b1, b2;
        b1 = $urandom % $bits(pkt_t);
        b2 = (b1 + 1 + $urandom % ($bits(pkt_t) - 1)) % $bits(pkt_t);
        p[b1] = !p[b1]; p[b2] = !p[b2]; n_double++;
      end else begin
        expect_cnt[p.msg.elem]++;
      end
      chan.push_back(p);
    end
    if (ej_valid && ej_ready) void'(chan.pop_front());
    if (rx_valid && rx_ready) begin
      if (rx_last) got_last++;
      else begin
        n_got++;
        checks++;
        if (!expect_cnt.exists(rx_elem)) begin
          failures++; if (failures < 10) $display("unexpected element %h", rx_elem);
        end else begin
          expect_cnt[rx_elem]--;
          if (expect_cnt[rx_elem] == 0) expect_cnt.delete(rx_elem);
        end
      end
    end
  end

  always @(negedge clk) begin
    ej_valid = chan.size() > 0;
    ej_pkt   = (chan.size() > 0) ? chan[0] : '0;
    inj_ready = ($urandom % 4 != 0);
    rx_ready  = ($urandom % 5 != 0);
  end

  initial begin
    node_id = 3; dest_mask = 7; ej_valid = 0; ej_pkt = '0; map_col = 0; tx_valid = 0; tx_last = 0; tx_elem = '0; rx_close = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      map_col = (i >= 150);
      tx_valid = 1; tx_last = 0;
      tx_elem = '{row: $urandom % 64, col: $urandom % 64, val: $urandom};
      sent_order.push_back(tx_elem);
      @(posedge clk);
      while (!tx_ready) @(posedge clk);
      if (i == 149) begin
        // let the pool drain before switching the mapping
        @(negedge clk); tx_valid = 0;
        while (!tx_empty) @(negedge clk);
      end
    end
    @(negedge clk);
    tx_valid = 1; tx_last = 1;
    @(negedge clk);
    tx_valid = 0; tx_last = 0;
    while (!tx_empty || chan.size() > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    rx_close = 1; @(negedge clk); rx_close = 0;
    repeat (20) @(negedge clk);
    checks++; if (got_last != 1) begin failures++; $display("end tokens %0d", got_last); end
    checks++; if (expect_cnt.num() != 0) begin failures++; $display("%0d elements never arrived", expect_cnt.num()); end
    checks++; if (ecc_corrected != n_single) begin failures++; $display("corrected %0d expected %0d", ecc_corrected, n_single); end
    checks++; if (ecc_dropped != n_double) begin failures++; $display("dropped %0d expected %0d", ecc_dropped, n_double); end
    checks++; if (tx_count != 300 || rx_count != 300 - n_double) begin failures++; $display("counts tx %0d rx %0d", tx_count, rx_count); end
    checks++; if (reordered == 0) begin failures++; $display("send order never randomized"); end
    checks++; if (n_single == 0 || n_double == 0) begin failures++; $display("no bit errors injected"); end
    $display("singles %0d doubles %0d reordered %0d", n_single, n_double, reordered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
