// torus_router_tb: direction choice, bubble rule and arbitration of a router.
//
// A ring router (8 nodes, address 0) and a 2D router (4x4, address (1,2))
// get single packets for every destination; the output port must be the one
// of the shorter way round the first differing dimension (worked out here).
// Then the bubble rule: with one free downstream slot an injected packet must
// wait while a packet already travelling in the ring passes. Finally two
// inputs competing for one output must be served alternately.
module torus_router_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ring router, 3 ports
  logic in_valid [3], in_s1 [3], in_s2 [3], out_valid [3], out_s1 [3], out_s2 [3];
  pkt_t in_pkt [3], out_pkt [3];
  logic [31:0] fwd, blk;
  torus_router r1 (.clk, .rst_n, .my_id(node_t'(0)), .in_valid, .in_pkt, .in_space1(in_s1), .in_space2(in_s2),
    .out_valid, .out_pkt, .out_space1(out_s1), .out_space2(out_s2), .fwd_count(fwd), .block_count(blk));

  // 2D router, 5 ports, address x=1 (bits 1:0), y=2 (bits 3:2)
  logic in_valid2 [5], in_s12 [5], in_s22 [5], out_valid2 [5], out_s12 [5], out_s22 [5];
  pkt_t in_pkt2 [5], out_pkt2 [5];
  logic [31:0] fwd2, blk2;
  torus_router #(.NDIM(2), .RADIX(4)) r2 (.clk, .rst_n, .my_id(node_t'(4'b1001)), .in_valid(in_valid2), .in_pkt(in_pkt2),
    .in_space1(in_s12), .in_space2(in_s22), .out_valid(out_valid2), .out_pkt(out_pkt2),
    .out_space1(out_s12), .out_space2(out_s22), .fwd_count(fwd2), .block_count(blk2));

  function automatic pkt_t mk(int dst, int tag);
    pkt_t p; p = '0; p.msg.dest = node_t'(dst); p.msg.elem.val = tag; return p;
  endfunction

  // wait for the packet with tag to leave; return its port (-1 if never)
  task automatic wait_out1(int tag, output int port);
    port = -1;
    for (int t = 0; t < 10 && port < 0; t++) begin
      #1;
      for (int o = 0; o < 3; o++) if (out_valid[o] && out_pkt[o].msg.elem.val == tag) port = o;
      @(negedge clk);
    end
  endtask
  task automatic wait_out2(int tag, output int port);
    port = -1;
    for (int t = 0; t < 10 && port < 0; t++) begin
      #1;
      for (int o = 0; o < 5; o++) if (out_valid2[o] && out_pkt2[o].msg.elem.val == tag) port = o;
      @(negedge clk);
    end
  endtask

  initial begin
    for (int i = 0; i < 3; i++) begin in_valid[i] = 0; in_pkt[i] = '0; out_s1[i] = 1; out_s2[i] = 1; end
    for (int i = 0; i < 5; i++) begin in_valid2[i] = 0; in_pkt2[i] = '0; out_s12[i] = 1; out_s22[i] = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- ring: each destination ----
    for (int d = 0; d < 8; d++) begin
      int port, expp, delta;
      delta = d % 8;
      expp = (d == 0) ? 0 : ((delta <= 4) ? 1 : 2);
      @(negedge clk); in_valid[0] = 1; in_pkt[0] = mk(d, 100 + d);
      @(negedge clk); in_valid[0] = 0;
      wait_out1(100 + d, port);
      checks++;
      if (port != expp) begin failures++; $display("ring dest %0d left on port %0d, expected %0d", d, port, expp); end
    end
    // ---- 2D: each destination ----
    for (int d = 0; d < 16; d++) begin
      int port, expp, mx, my, tx, ty;
      mx = 1; my = 2; tx = d % 4; ty = d / 4;
      if (tx != mx)      expp = (((tx - mx + 4) % 4) <= 2) ? 1 : 2;
      else if (ty != my) expp = (((ty - my + 4) % 4) <= 2) ? 3 : 4;
      else               expp = 0;
      @(negedge clk); in_valid2[0] = 1; in_pkt2[0] = mk(d, 200 + d);
      @(negedge clk); in_valid2[0] = 0;
      wait_out2(200 + d, port);
      checks++;
      if (port != expp) begin failures++; $display("2D dest %0d left on port %0d, expected %0d", d, port, expp); end
    end
    // ---- bubble rule on the ring: + output has only one free slot ----
    begin
      int p_inj, p_cont;
      out_s2[1] = 0;
      @(negedge clk);
      in_valid[0] = 1; in_pkt[0] = mk(2, 300);   // injected, wants +
      in_valid[1] = 1; in_pkt[1] = mk(3, 301);   // travelling +, continues
      @(negedge clk); in_valid[0] = 0; in_valid[1] = 0;
      wait_out1(301, p_cont);
      checks++; if (p_cont != 1) begin failures++; $display("continuing packet blocked"); end
      repeat (3) @(negedge clk);
      checks++; if (r1.cnt[0] != 1) begin failures++; $display("injected packet did not wait for two free slots"); end
      out_s2[1] = 1;
      wait_out1(300, p_inj);
      checks++; if (p_inj != 1) begin failures++; $display("injected packet not released"); end
    end
    // ---- round robin: inputs 0 and 2 both want + (dest 1) ----
    begin
      int order [$];
      @(negedge clk);
      out_s1[1] = 0; out_s2[1] = 0;
      for (int k = 0; k < 3; k++) begin
        in_valid[0] = 1; in_pkt[0] = mk(1, 400 + k);
        in_valid[2] = 1; in_pkt[2] = mk(1, 500 + k);
        @(negedge clk);
      end
      in_valid[0] = 0; in_valid[2] = 0;
      out_s1[1] = 1; out_s2[1] = 1;
      for (int t = 0; t < 12; t++) begin
        #1;
        if (out_valid[1]) order.push_back(int'(out_pkt[1].msg.elem.val) / 100);
        @(negedge clk);
      end
      checks++;
      if (order.size() != 6) begin failures++; $display("round robin: %0d packets", order.size()); end
      for (int i = 1; i < order.size(); i++) begin
        checks++;
        if (order[i] == order[i-1]) begin failures++; $display("round robin: same input twice in a row"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
