// torus_dest_order_tb: randomized against ordered destinations on a 512-node
// 3D torus (8 x 8 x 8).
//
// Every node sends the same set of single-element packets twice: D packet
// groups of B packets, group j going to node (j * STRIDE) mod 512.
//   ordered    - each node works through the groups in the same order, as it
//                does when it sends a sorted matrix: at any moment nearly all
//                packets in flight head for the same node.
//   randomized - each node sends its packets in its own random order, which
//                is what the send pool of the communication module does.
// Ejection is always ready. For both runs the testbench checks that every
// packet arrives exactly once at the node in its header, and counts the
// clocks until the last arrives. The randomized run must finish first; the
// ratio of the two times and the head-of-line blocking counts are printed.
// This is the network experiment of the architecture (randomized versus
// unique destinations on an 8x8x8 torus) with this design's router; the
// traffic volume (D, B) is this testbench's choice.
module torus_dest_order_tb;
  import gp_pkg::*;
  localparam int NDIM = 3, RADIX = 8, NN = 512;
  localparam int D = 8, B = 2, STRIDE = 73, PER = D * B;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic inj_valid [NN], inj_ready [NN], ej_valid [NN], ej_ready [NN];
  pkt_t inj_pkt [NN], ej_pkt [NN];
  logic [31:0] fwd [NN], blk [NN];
  torus_network #(.NDIM(NDIM), .RADIX(RADIX)) net (.clk, .rst_n,
    .inj_valid, .inj_ready, .inj_pkt, .ej_valid, .ej_ready, .ej_pkt,
    .fwd_count(fwd), .block_count(blk));

  int dl [NN][PER];      // destination list per node, in send order
  int nxt [NN];          // next list entry to send
  bit taken [NN];
  bit seen [NN * PER];
  int got = 0, sent = 0, bad = 0;
  bit run = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NN; n++) begin
      if (inj_valid[n] && inj_ready[n]) begin sent++; taken[n] = 1; end
      if (ej_valid[n]) begin
        int s;
        s = int'(ej_pkt[n].msg.elem.row);
        got++;
        if (ej_pkt[n].msg.dest != node_t'(n) || s >= NN * PER || seen[s]) bad++;
        else seen[s] = 1;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NN; n++) begin
      if (taken[n]) begin inj_valid[n] = 0; taken[n] = 0; nxt[n]++; end
      if (run && !inj_valid[n] && nxt[n] < PER) begin
        int dst;
        dst = dl[n][nxt[n]];
        inj_pkt[n].msg.dest = node_t'(dst);
        inj_pkt[n].msg.elem = '{row: n * PER + nxt[n], col: n, val: dst};
        inj_pkt[n].ecc = '0;
        inj_valid[n] = 1;
      end
    end
  end

  task automatic one_run(input bit randomized, output int clocks, output longint blocked);
    int t0;
    rst_n = 0;
    run = 0;
    for (int n = 0; n < NN; n++) begin
      inj_valid[n] = 0; inj_pkt[n] = '0; ej_ready[n] = 1; taken[n] = 0; nxt[n] = 0;
      for (int j = 0; j < PER; j++) dl[n][j] = ((j / B) * STRIDE) % NN;
      if (randomized)
        for (int j = PER - 1; j > 0; j--) begin
          int r, t;
          r = $urandom % (j + 1);
          t = dl[n][j]; dl[n][j] = dl[n][r]; dl[n][r] = t;
        end
    end
    for (int s = 0; s < NN * PER; s++) seen[s] = 0;
    got = 0; sent = 0; bad = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    t0 = cyc;
    run = 1;
    while (got < NN * PER && cyc - t0 < 150000) @(posedge clk);
    clocks = cyc - t0;
    repeat (20) @(posedge clk);
    checks++;
    if (got != NN * PER || sent != NN * PER || bad != 0) begin
      failures++;
      $display("%s: sent %0d got %0d bad %0d of %0d", randomized ? "randomized" : "ordered", sent, got, bad, NN * PER);
    end
    blocked = 0;
    for (int n = 0; n < NN; n++) blocked += blk[n];
  endtask

  initial begin
    int c_ord, c_rnd;
    longint b_ord, b_rnd;
    one_run(0, c_ord, b_ord);
    one_run(1, c_rnd, b_rnd);
    $display("ordered destinations:    %0d packets in %0d clocks, %0d blocked head-clocks", NN * PER, c_ord, b_ord);
    $display("randomized destinations: %0d packets in %0d clocks, %0d blocked head-clocks", NN * PER, c_rnd, b_rnd);
    $display("speed-up of randomized order: %0.2f", real'(c_ord) / real'(c_rnd));
    checks++;
    if (!(c_rnd < c_ord)) begin
      failures++; $display("randomized order was not faster");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
