// merge_array: the systolic selection array of the k-way merge sorter.
//
// K identical cells form a linear array that is kept sorted, smallest entry
// in cell 0. Each entry is the current head of one of K sorted input runs,
// tagged with its run number. Every clock the array can, at the same time,
// hand out its smallest entry (pop) and take in the next element of a run
// (insert). Each cell decides its next content from its own entry, its two
// nearest neighbours and the entry being inserted, so the smallest of K
// values is available every clock with no K-wide comparison tree.
//
// The paper gives the principle: k linear systolic cells, nearest-neighbour
// communication, one minimum per clock. The cell rule is this design's: the
// inserted entry is broadcast to all cells (one comparator per cell), and
// ties between equal keys go to the lower run number, which makes the merge
// stable when run numbers follow memory order.
//
// Interface: head_* shows cell 0 combinationally; pop and ins_valid take
// effect at the next clock edge. ins_valid without pop needs a free cell;
// the caller never holds more than K entries (one per run).
module merge_array #(
  parameter int unsigned K     = 32,          // number of cells / merge ways
  parameter int unsigned KEY_W = 64,
  parameter int unsigned PAY_W = 32,
  localparam int unsigned ID_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,       // empty all cells
  input  logic             ins_valid,
  input  logic [KEY_W-1:0] ins_key,
  input  logic [ID_W-1:0]  ins_id,
  input  logic [PAY_W-1:0] ins_pay,
  input  logic             pop,
  output logic             head_valid,
  output logic [KEY_W-1:0] head_key,
  output logic [ID_W-1:0]  head_id,
  output logic [PAY_W-1:0] head_pay,
  output logic             empty
);

  typedef struct packed {
    logic             v;
    logic [KEY_W-1:0] key;
    logic [ID_W-1:0]  id;
    logic [PAY_W-1:0] pay;
  } cell_t;

  cell_t c_q    [K];
  cell_t c_d [K];
  cell_t ins;

  assign ins = '{v: 1'b1, key: ins_key, id: ins_id, pay: ins_pay};

  // a sorts at or before b (empty cells sort last)
  function automatic logic le(cell_t a, cell_t b);
    if (!a.v) return 1'b0;
    return {a.key, a.id} <= {b.key, b.id};
  endfunction

  always_comb begin
    for (int i = 0; i < K; i++) begin
      cell_t right, left;
      right = (i + 1 < K) ? c_q[(i+1) % K] : '0;
      left  = (i > 0)     ? c_q[(i+K-1) % K] : '0;
      c_d[i] = c_q[i];
      if (pop && ins_valid) begin
        // list = sorted(c_q[1..] + ins), shifted one place towards cell 0
        if (le(right, ins))                       c_d[i] = right;
        else if (i == 0 || le(c_q[i], ins))      c_d[i] = ins;
        else                                      c_d[i] = c_q[i];
      end else if (pop) begin
        c_d[i] = right;
      end else if (ins_valid) begin
        if (le(c_q[i], ins))                     c_d[i] = c_q[i];
        else if (i == 0 || le(left, ins))         c_d[i] = ins;
        else                                      c_d[i] = left;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) c_q[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < K; i++) c_q[i] <= '0;
    end else begin
      for (int i = 0; i < K; i++) c_q[i] <= c_d[i];
    end
  end

  assign head_valid = c_q[0].v;
  assign head_key   = c_q[0].key;
  assign head_id    = c_q[0].id;
  assign head_pay   = c_q[0].pay;
  assign empty      = !c_q[0].v;

endmodule
