// stream_alu_tb: checks MAP and REDUCE modes of the streaming ALU.
//
// MAP: every operator is applied to random (val, b) pairs and compared with
// arithmetic written out here; with no back-pressure the unit must take one
// element per clock. REDUCE: index-sorted streams with repeated indices are
// accumulated with ADD, SUB, MIN, MAX, XOR, with and without match_only,
// under random output back-pressure, and compared with a reference fold.
module stream_alu_tb;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mode_reduce, match_only, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  alu_op_e op;
  elem_t in_elem, out_elem;
  val_t in_b;
  logic [31:0] match_count;

  stream_alu dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic val_t ref_op(alu_op_e o, val_t a, val_t b);
    case (o)
      OP_ADD: return a + b;
      OP_SUB: return a - b;
      OP_MUL: return a * b;
      OP_DIV: return (b == 0) ? 0 : $unsigned($signed(a) / $signed(b));
      OP_MIN: return ($signed(a) < $signed(b)) ? a : b;
      OP_MAX: return ($signed(a) > $signed(b)) ? a : b;
      OP_AND: return a & b;
      OP_OR:  return a | b;
      OP_XOR: return a ^ b;
      OP_FST: return a;
      default: return b;
    endcase
  endfunction

  elem_t exp_q [$];
  elem_t got_q [$];
  int    got_last;
  bit    stall;

  // output collector
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_last) got_last++;
    else got_q.push_back(out_elem);
  end
  always @(negedge clk) out_ready = stall ? ($urandom % 2 == 0) : 1'b1;

  task automatic send(elem_t e, val_t b, logic last);
    in_valid = 1; in_elem = e; in_b = b; in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  task automatic finish_stream(string what);
    int guard = 0;
    while (got_last == 0 && guard < 1000) begin @(negedge clk); guard++; end
    checks++;
    if (got_q.size() != exp_q.size()) begin
      failures++; $display("%s: %0d results, expected %0d", what, got_q.size(), exp_q.size());
    end
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++) begin
      checks++;
      if (got_q[i] != exp_q[i]) begin
        failures++;
        if (failures < 10) $display("%s: item %0d got %h exp %h", what, i, got_q[i], exp_q[i]);
      end
    end
    got_q.delete(); exp_q.delete(); got_last = 0;
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_elem = '0; in_b = '0; mode_reduce = 0; match_only = 0;
    op = OP_ADD; stall = 0; got_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // MAP, every operator
    for (int o = 0; o <= 10; o++) begin
      int t0, t1;
      op = alu_op_e'(o);
      stall = (o % 2 == 1);
      @(negedge clk);
      t0 = $time;
      for (int i = 0; i < 40; i++) begin
        elem_t e; val_t b;
        e.row = $urandom; e.col = $urandom;
        e.val = (i % 5 == 0) ? 32'hFFFF_FFF0 : $urandom % 1000;
        b = (i % 7 == 0) ? 0 : ((i % 3 == 0) ? -($urandom % 50) : $urandom % 1000);
        exp_q.push_back('{row: e.row, col: e.col, val: ref_op(op, e.val, b)});
        send(e, b, 0);
      end
      t1 = $time;
      if (!stall) begin
        checks++;
        if ((t1 - t0) / 10 != 40) begin failures++; $display("MAP rate: %0d clocks for 40", (t1 - t0) / 10); end
      end
      send('0, '0, 1);
      finish_stream("map");
    end
    // REDUCE
    mode_reduce = 1;
    for (int r = 0; r < 10; r++) begin
      alu_op_e ops [5] = '{OP_ADD, OP_SUB, OP_MIN, OP_MAX, OP_XOR};
      elem_t acc; int cnt; bit have;
      op = ops[r % 5];
      match_only = (r >= 5);
      stall = (r % 2 == 0);
      @(negedge clk);
      have = 0; cnt = 0;
      for (int i = 0; i < 60; i++) begin
        elem_t e;
        e.row = 32'(i / 6); e.col = 32'($urandom % 3);
        e.val = $urandom % 200 - 100;
        // keep stream index-sorted: col only grows within a row
        if (have && e.row == acc.row && e.col < acc.col) e.col = acc.col;
        if (have && e.row == acc.row && e.col == acc.col) begin
          acc.val = ref_op(op, acc.val, e.val); cnt++;
        end else begin
          if (have && (!match_only || cnt >= 2)) exp_q.push_back(acc);
          acc = e; cnt = 1; have = 1;
        end
        send(e, '0, 0);
      end
      if (have && (!match_only || cnt >= 2)) exp_q.push_back(acc);
      send('0, '0, 1);
      finish_stream("reduce");
    end
    checks++;
    if (match_count == 0) begin failures++; $display("no matching indices counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
