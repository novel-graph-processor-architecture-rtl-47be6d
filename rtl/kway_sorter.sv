// kway_sorter: k-way systolic merge sorter for matrix elements.
//
// Sorts a block of up to DEPTH coordinate elements by index, row-major
// ({row,col}) or column-major ({col,row}). It is a recursive k-way merge
// sort run bottom-up: pass p merges groups of K sorted runs of length K^p
// into runs of length K^(p+1), reading one ping-pong buffer and writing the
// other, until one run is left. A merge_array picks the smallest of the K
// run heads every clock, so a pass costs about one clock per element and a
// whole sort about n*log_K(n) clocks, as the paper states.
//
// Follows the paper: k-way divide-and-conquer merge sort, n log_k n memory
// cycles, k linear systolic cells finding the minimum each clock.
// This design's choices: the two on-chip buffers (the paper does not say
// where the sort memory is), a fill phase of one clock per run at the start
// of each group, stable ties, and the stream protocol below.
//
// Streams use valid/ready. An end-of-stream token is a beat with last=1 that
// carries no element. Operation: in LOAD, elements are written in arrival
// order; elements beyond DEPTH are dropped and set `overflow`. The end token
// starts sorting. The sorted elements then leave on out_*, followed by an
// end token, and the sorter returns to LOAD.
// Timing: after the input end token, a pass with run length L over n
// elements takes, per group of K runs with r non-empty runs and s elements,
// r + (r<K) + s + 1 clocks; the first output appears one clock after the
// last pass.
module kway_sorter
  import gp_pkg::*;
#(
  parameter int unsigned K     = 32,    // merge ways (paper's example k = 32)
  parameter int unsigned DEPTH = 1024   // elements per sort block
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   col_major,   // sort by {col,row} instead of {row,col}
  // input stream
  input  logic   in_valid,
  output logic   in_ready,
  input  elem_t  in_elem,
  input  logic   in_last,
  // output stream
  output logic   out_valid,
  input  logic   out_ready,
  output elem_t  out_elem,
  output logic   out_last,
  // status
  output logic   busy,        // sorting or emitting
  output logic   overflow     // sticky: an element was dropped
);

  localparam int unsigned ID_W  = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);
  localparam int unsigned KEY_W = 2 * IDX_W;

  typedef enum logic [2:0] {S_LOAD, S_PASS, S_FILL, S_MERGE, S_OUT} state_e;
  state_e state;

  elem_t bank0 [DEPTH];
  elem_t bank1 [DEPTH];

  logic             sb;            // bank holding the current runs
  logic [CNT_W-1:0] n;             // elements loaded
  logic [31:0]      run_len;       // L
  logic [31:0]      grp;           // start of current group
  logic [31:0]      fill_s;        // start of run being filled
  logic [ID_W-1:0]  fill_j;
  logic [31:0]      rptr [K];
  logic [31:0]      rend [K];
  logic [CNT_W-1:0] wptr;
  logic [CNT_W-1:0] optr;
  logic             colm_q;

  // merge array
  logic             ma_ins, ma_pop, ma_hv, ma_empty;
  logic [KEY_W-1:0] ma_ikey, ma_hkey;
  logic [ID_W-1:0]  ma_iid, ma_hid;
  val_t             ma_ipay, ma_hpay;

  merge_array #(.K(K), .KEY_W(KEY_W), .PAY_W(VAL_W)) u_ma (
    .clk, .rst_n, .clear(1'b0),
    .ins_valid(ma_ins), .ins_key(ma_ikey), .ins_id(ma_iid), .ins_pay(ma_ipay),
    .pop(ma_pop),
    .head_valid(ma_hv), .head_key(ma_hkey), .head_id(ma_hid), .head_pay(ma_hpay),
    .empty(ma_empty)
  );

  // single read port on the source bank
  logic [31:0] rd_addr;
  elem_t       rd_data;
  always_comb begin
    unique case (state)
      S_FILL:  rd_addr = fill_s;
      S_MERGE: rd_addr = rptr[ma_hid];
      default: rd_addr = 32'(optr);
    endcase
  end
  assign rd_data = sb ? bank1[rd_addr[$clog2(DEPTH)-1:0]] : bank0[rd_addr[$clog2(DEPTH)-1:0]];

  function automatic elem_t unkey(logic [KEY_W-1:0] k, val_t v, logic cm);
    elem_t e;
    e.val = v;
    if (cm) begin e.col = k[KEY_W-1 -: IDX_W]; e.row = k[IDX_W-1:0]; end
    else    begin e.row = k[KEY_W-1 -: IDX_W]; e.col = k[IDX_W-1:0]; end
    return e;
  endfunction

  // merge-array controls
  logic fill_hit;     // current fill run is non-empty
  logic refill;       // popped run has another element
  assign fill_hit = (state == S_FILL) && (fill_s < 32'(n));
  assign refill   = (state == S_MERGE) && ma_hv && (rptr[ma_hid] < rend[ma_hid]);
  assign ma_pop   = (state == S_MERGE) && ma_hv;
  assign ma_ins   = fill_hit || refill;
  assign ma_ikey  = sort_key(rd_data, colm_q);
  assign ma_iid   = (state == S_FILL) ? fill_j : ma_hid;
  assign ma_ipay  = rd_data.val;

  // buffer write port
  logic             wr_en, wr_bank;
  logic [CNT_W-1:0] wr_addr;
  elem_t            wr_data;
  always_comb begin
    wr_en   = 1'b0;
    wr_bank = 1'b0;
    wr_addr = n;
    wr_data = in_elem;
    if (state == S_LOAD && in_valid && !in_last && n < CNT_W'(DEPTH)) begin
      wr_en = 1'b1;
    end else if (ma_pop) begin
      wr_en   = 1'b1;
      wr_bank = !sb;
      wr_addr = wptr;
      wr_data = unkey(ma_hkey, ma_hpay, colm_q);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_bank) bank1[wr_addr[$clog2(DEPTH)-1:0]] <= wr_data;
      else         bank0[wr_addr[$clog2(DEPTH)-1:0]] <= wr_data;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (optr == n);
  assign out_elem  = rd_data;
  assign busy      = (state != S_LOAD);

  logic [31:0] grp_span;   // K * L
  assign grp_span = run_len * K;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      sb       <= 1'b0;
      n        <= '0;
      run_len  <= 32'd1;
      grp      <= '0;
      fill_s   <= '0;
      fill_j   <= '0;
      wptr     <= '0;
      optr     <= '0;
      overflow <= 1'b0;
      colm_q   <= 1'b0;
      for (int i = 0; i < K; i++) begin rptr[i] <= '0; rend[i] <= '0; end
    end else begin
      unique case (state)
        S_LOAD: begin
          colm_q <= col_major;
          if (in_valid) begin
            if (in_last) begin
              sb      <= 1'b0;
              run_len <= 32'd1;
              grp     <= '0;
              state   <= S_PASS;
            end else if (n < CNT_W'(DEPTH)) begin
              n <= n + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
        end
        // start a pass, or finish when one run is left
        S_PASS: begin
          if (run_len >= 32'(n)) begin
            optr  <= '0;
            state <= S_OUT;
          end else begin
            grp    <= '0;
            fill_s <= '0;
            fill_j <= '0;
            wptr   <= '0;
            state  <= S_FILL;
          end
        end
        S_FILL: begin
          if (fill_hit) begin
            rptr[fill_j] <= fill_s + 1;
            rend[fill_j] <= (fill_s + run_len < 32'(n)) ? fill_s + run_len : 32'(n);
            fill_s       <= fill_s + run_len;
            fill_j       <= fill_j + 1'b1;
            if (32'(fill_j) == K - 1) state <= S_MERGE;
          end else begin
            state <= S_MERGE;
          end
        end
        S_MERGE: begin
          if (ma_hv) begin
            wptr <= wptr + 1'b1;
            if (refill) rptr[ma_hid] <= rptr[ma_hid] + 1;
          end else if (grp + grp_span < 32'(n)) begin
            grp    <= grp + grp_span;
            fill_s <= grp + grp_span;
            fill_j <= '0;
            state  <= S_FILL;
          end else begin
            sb      <= !sb;
            run_len <= grp_span;
            state   <= S_PASS;
          end
        end
        S_OUT: begin
          if (out_ready) begin
            if (optr == n) begin
              n     <= '0;
              state <= S_LOAD;
            end else begin
              optr <= optr + 1'b1;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
