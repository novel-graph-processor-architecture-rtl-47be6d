// torus_network_tb: random all-to-all traffic on two torus shapes.
//
// A 4x4 2D torus and an 8-node ring (the prototype's shape) are loaded with
// random traffic at full injection rate with random ejection stalls. Every
// packet carries a serial number; each must arrive exactly once, at the node
// named in its header. A lone packet in an empty network must arrive after
// (minimal hop count + 2) clocks. All packets must drain (no deadlock).
module torus_network_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- 2D 4x4 ----
  localparam int NA = 16;
  logic inj_valid_a [NA], inj_ready_a [NA], ej_valid_a [NA], ej_ready_a [NA];
  pkt_t inj_pkt_a [NA], ej_pkt_a [NA];
  logic [31:0] fwd_a [NA], blk_a [NA];
  torus_network #(.NDIM(2), .RADIX(4)) net_a (.clk, .rst_n,
    .inj_valid(inj_valid_a), .inj_ready(inj_ready_a), .inj_pkt(inj_pkt_a),
    .ej_valid(ej_valid_a), .ej_ready(ej_ready_a), .ej_pkt(ej_pkt_a),
    .fwd_count(fwd_a), .block_count(blk_a));

  // ---- 1D 8 (defaults) ----
  localparam int NB = 8;
  logic inj_valid_b [NB], inj_ready_b [NB], ej_valid_b [NB], ej_ready_b [NB];
  pkt_t inj_pkt_b [NB], ej_pkt_b [NB];
  logic [31:0] fwd_b [NB], blk_b [NB];
  torus_network net_b (.clk, .rst_n,
    .inj_valid(inj_valid_b), .inj_ready(inj_ready_b), .inj_pkt(inj_pkt_b),
    .ej_valid(ej_valid_b), .ej_ready(ej_ready_b), .ej_pkt(ej_pkt_b),
    .fwd_count(fwd_b), .block_count(blk_b));

  int seen_a [int];
  int seen_b [int];
  int sent_a = 0, sent_b = 0, got_a = 0, got_b = 0;
  bit traffic = 0;
  int lone_dst = -1, lone_arrive = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic pkt_t mk(int dst, int serial);
    pkt_t p;
    p.msg.dest = node_t'(dst);
    p.msg.elem = '{row: serial, col: dst, val: $urandom};
    p.ecc = '0;
    return p;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NA; n++) begin
      if (inj_valid_a[n] && inj_ready_a[n]) begin sent_a++; taken_a[n] = 1; end
      if (ej_valid_a[n] && ej_ready_a[n]) begin
        int s; s = int'(ej_pkt_a[n].msg.elem.row);
        got_a++; checks++;
        if (ej_pkt_a[n].msg.dest != node_t'(n) || seen_a.exists(s)) begin
          failures++; if (failures < 10) $display("2D: serial %0d at node %0d dest %0d", s, n, ej_pkt_a[n].msg.dest);
        end
        seen_a[s] = 1;
        if (int'(ej_pkt_a[n].msg.dest) == lone_dst) lone_arrive = cyc;
      end
    end
    for (int n = 0; n < NB; n++) begin
      if (inj_valid_b[n] && inj_ready_b[n]) begin sent_b++; taken_b[n] = 1; end
      if (ej_valid_b[n] && ej_ready_b[n]) begin
        int s; s = int'(ej_pkt_b[n].msg.elem.row);
        got_b++; checks++;
        if (ej_pkt_b[n].msg.dest != node_t'(n) || seen_b.exists(s)) begin
          failures++; if (failures < 10) $display("1D: serial %0d at node %0d dest %0d", s, n, ej_pkt_b[n].msg.dest);
        end
        seen_b[s] = 1;
      end
    end
  end

  int ser = 0;
  bit taken_a [NA];
  bit taken_b [NB];
  // drive new packets at negedge; a packet stays until taken
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NA; n++) begin
      if (taken_a[n]) begin inj_valid_a[n] = 0; taken_a[n] = 0; end
      if (traffic && !inj_valid_a[n]) begin inj_valid_a[n] = 1; inj_pkt_a[n] = mk($urandom % NA, ser++); end
      ej_ready_a[n] = ($urandom % 4 != 0);
    end
    for (int n = 0; n < NB; n++) begin
      if (taken_b[n]) begin inj_valid_b[n] = 0; taken_b[n] = 0; end
      if (traffic && !inj_valid_b[n]) begin inj_valid_b[n] = 1; inj_pkt_b[n] = mk($urandom % NB, ser++); end
      ej_ready_b[n] = ($urandom % 3 != 0);
    end
  end

  initial begin
    for (int n = 0; n < NA; n++) begin inj_valid_a[n] = 0; inj_pkt_a[n] = '0; ej_ready_a[n] = 1; taken_a[n] = 0; end
    for (int n = 0; n < NB; n++) begin inj_valid_b[n] = 0; inj_pkt_b[n] = '0; ej_ready_b[n] = 1; taken_b[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lone packet latency: 2D, node 0 -> (2,3) = node 14: hops 2 + 1 = 3
    for (int t = 0; t < 2; t++) begin
      int t0, dst;
      dst = (t == 0) ? 14 : 5;   // node 5 = (1,1): 2 hops
      @(negedge clk);
      for (int n = 0; n < NA; n++) ej_ready_a[n] = 1;
      lone_dst = dst; lone_arrive = 0;
      inj_valid_a[0] = 1; inj_pkt_a[0] = mk(dst, 1000000 + t);
      t0 = cyc;
      repeat (30) @(negedge clk);
      checks++;
      if (lone_arrive - t0 != ((t == 0) ? 3 : 2) + 2) begin
        failures++; $display("lone packet to %0d took %0d clocks", dst, lone_arrive - t0);
      end
    end
    lone_dst = -1;
    traffic = 1;
    repeat (3000) @(negedge clk);
    traffic = 0;
    repeat (500) @(negedge clk);
    checks++;
    if (got_a != sent_a || got_b != sent_b) begin
      failures++; $display("2D sent %0d got %0d, 1D sent %0d got %0d", sent_a, got_a, sent_b, got_b);
    end
    begin
      int blk; blk = 0;
      for (int n = 0; n < NB; n++) blk += blk_b[n];
      checks++;
      if (blk == 0) begin failures++; $display("no blocking ever happened"); end
      $display("2D delivered %0d, 1D delivered %0d, 1D blocked head-clocks %0d", got_a, got_b, blk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
