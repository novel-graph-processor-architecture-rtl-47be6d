// merge_array_tb: checks the systolic selection array against a reference.
//
// Random mixes of insert, pop and pop+insert are applied to an 8-cell array
// while the testbench keeps its own list of held entries; after every clock
// the array head must be the entry with the smallest {key, id} in that list,
// and the array must be empty exactly when the list is.
module merge_array_tb;
  localparam int K = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ins_valid, pop, head_valid, empty;
  logic [15:0] ins_key, head_key;
  logic [2:0]  ins_id, head_id;
  logic [7:0]  ins_pay, head_pay;

  merge_array #(.K(K), .KEY_W(16), .PAY_W(8)) dut (
    .clk, .rst_n, .clear(1'b0), .ins_valid, .ins_key, .ins_id, .ins_pay, .pop,
    .head_valid, .head_key, .head_id, .head_pay, .empty);

  int checks = 0, failures = 0;
  // reference: entries held, indexed by id (one per id)
  logic        held  [K];
  logic [15:0] hkey  [K];
  logic [7:0]  hpay  [K];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_min();
    int m = -1;
    for (int i = 0; i < K; i++)
      if (held[i] && (m < 0 || {hkey[i], 3'(i)} < {hkey[m], 3'(m)})) m = i;
    return m;
  endfunction

  initial begin
    for (int i = 0; i < K; i++) held[i] = 0;
    ins_valid = 0; pop = 0; ins_key = 0; ins_id = 0; ins_pay = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int m, nheld, free_id;
      m = ref_min();
      nheld = 0; free_id = -1;
      for (int i = 0; i < K; i++) begin
        if (held[i]) nheld++;
        else if (free_id < 0 || ($urandom % 2) == 0) free_id = i;
      end
      // check head
      checks++;
      if ((m < 0) != empty || (m >= 0 && (head_id != 3'(m) || head_key != hkey[m] || head_pay != hpay[m]))) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d ref=%0d head_id=%0d key=%h", t, m, head_id, head_key);
      end
      // choose action
      @(negedge clk);
      pop = (m >= 0) && ($urandom % 3 != 0);
      ins_valid = 0;
      if (pop && ($urandom % 2 == 0)) begin
        ins_valid = 1; ins_id = 3'(m);   // refill from the popped run
      end else if (!pop && free_id >= 0 && ($urandom % 2 == 0)) begin
        ins_valid = 1; ins_id = 3'(free_id);
      end
      ins_key = 16'($urandom % 40);
      ins_pay = 8'($urandom);
      @(posedge clk);
      #1;
      if (pop) held[m] = 0;
      if (ins_valid) begin held[ins_id] = 1; hkey[ins_id] = ins_key; hpay[ins_id] = ins_pay; end
      @(negedge clk);
      pop = 0; ins_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
