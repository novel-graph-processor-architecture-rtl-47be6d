// torus_router: one node's packet router in a NDIM-dimensional torus.
//
// Each node sits in a torus of RADIX nodes per dimension (the architecture
// uses six dimensions; the built prototype a single ring of 8). A router has
// a local port (0) and, per dimension d, a "+" port (1+2d) and a "-" port
// (2+2d). Input port 1+2d receives packets travelling in the + direction of
// dimension d, i.e. from the - neighbour; output port 1+2d sends to the +
// neighbour. Node addresses are mixed-radix: digit d is
// id[d*log2(RADIX) +: log2(RADIX)].
//
// Routing: dimension order, lowest dimension first, taking the shorter way
// round each ring (ties go +). Every input has a FIFO of FIFO_DEPTH packets;
// each output arbitrates round-robin among the inputs whose head packet wants
// it. Flow control is by the free space of the downstream FIFO, passed back
// as registered flags. Rings are kept free of deadlock with bubble flow
// control: a packet entering a ring (injected, or turning from another
// dimension) needs two free downstream slots, a packet staying in its ring
// needs one.
//
// The paper names the network (6D toroid, small packets, randomized
// destinations) but not the router; everything here is this design's choice.
// Timing: a packet moves one hop per clock when not blocked; one packet per
// output per clock.
module torus_router
  import gp_pkg::*;
#(
  parameter int unsigned NDIM       = 1,
  parameter int unsigned RADIX      = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NP        = 2 * NDIM + 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  node_t my_id,
  // inputs (port 0 = injection from the node)
  input  logic  in_valid  [NP],
  input  pkt_t  in_pkt    [NP],
  output logic  in_space1 [NP],   // at least one free slot
  output logic  in_space2 [NP],   // at least two free slots
  // outputs (port 0 = ejection to the node)
  output logic  out_valid  [NP],
  output pkt_t  out_pkt    [NP],
  input  logic  out_space1 [NP],
  input  logic  out_space2 [NP],
  // statistics
  output logic [31:0] fwd_count,     // packets sent on neighbour links
  output logic [31:0] block_count    // clocks a head packet waited
);

  localparam int unsigned LB  = (RADIX > 1) ? $clog2(RADIX) : 1;
  localparam int unsigned PW  = (NP > 1) ? $clog2(NP) : 1;
  localparam int unsigned AW  = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  // ---------------- input FIFOs ----------------
  pkt_t            fmem [NP][FIFO_DEPTH];
  logic [AW-1:0]   rp   [NP];
  logic [AW-1:0]   wp   [NP];
  logic [CW-1:0]   cnt  [NP];
  logic            pop  [NP];
  logic            head_v [NP];
  pkt_t            head   [NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    assign head_v[i]    = (cnt[i] != '0);
    assign head[i]      = fmem[i][rp[i]];
    assign in_space1[i] = (cnt[i] <= CW'(FIFO_DEPTH - 1));
    assign in_space2[i] = (FIFO_DEPTH >= 2) && (cnt[i] <= CW'(FIFO_DEPTH - 2));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rp[i]  <= '0;
        wp[i]  <= '0;
        cnt[i] <= '0;
      end else begin
        if (in_valid[i]) wp[i] <= (32'(wp[i]) == FIFO_DEPTH - 1) ? '0 : wp[i] + 1'b1;
        if (pop[i])      rp[i] <= (32'(rp[i]) == FIFO_DEPTH - 1) ? '0 : rp[i] + 1'b1;
        cnt[i] <= cnt[i] + CW'(in_valid[i]) - CW'(pop[i]);
      end
    end
    always_ff @(posedge clk) if (in_valid[i]) fmem[i][wp[i]] <= in_pkt[i];
  end

  // ---------------- route computation ----------------
  function automatic logic [PW-1:0] route(node_t me, node_t dst);
    for (int d = 0; d < NDIM; d++) begin
      logic [LB-1:0] m, t, delta;
      m = me[d*LB +: LB];
      t = dst[d*LB +: LB];
      if (m != t) begin
        delta = t - m;    // modulo RADIX (RADIX is a power of two)
        return (32'(delta) <= RADIX / 2) ? PW'(1 + 2 * d) : PW'(2 + 2 * d);
      end
    end
    return '0;
  endfunction

  logic [PW-1:0] want [NP];
  logic          elig [NP];    // downstream has room for this head
  for (genvar i = 0; i < NP; i++) begin : g_route
    assign want[i] = route(my_id, head[i].msg.dest);
    always_comb begin
      if (want[i] == '0 || want[i] == PW'(i)) elig[i] = out_space1[want[i]];
      else                                    elig[i] = out_space2[want[i]];
    end
  end

  // ---------------- output arbitration ----------------
  logic [PW-1:0] rr    [NP];
  logic          gnt_v [NP];
  logic [PW-1:0] gnt_i [NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      gnt_v[o] = 1'b0;
      gnt_i[o] = '0;
      for (int k = NP - 1; k >= 0; k--) begin
        int unsigned i;
        i = (32'(rr[o]) + k) % NP;
        if (head_v[i] && elig[i] && want[i] == PW'(o)) begin
          gnt_v[o] = 1'b1;
          gnt_i[o] = PW'(i);
        end
      end
    end
    for (int i = 0; i < NP; i++) pop[i] = 1'b0;
    for (int o = 0; o < NP; o++) if (gnt_v[o]) pop[gnt_i[o]] = 1'b1;
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    assign out_valid[o] = gnt_v[o];
    assign out_pkt[o]   = head[gnt_i[o]];
  end

  logic [31:0] nf, nb;   // links used / heads waiting this clock
  always_comb begin
    nf = '0;
    nb = '0;
    for (int o = 1; o < NP; o++) if (gnt_v[o]) nf = nf + 1;
    for (int i = 0; i < NP; i++) if (head_v[i] && !pop[i]) nb = nb + 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) rr[o] <= '0;
      fwd_count   <= '0;
      block_count <= '0;
    end else begin
      for (int o = 0; o < NP; o++)
        if (gnt_v[o]) rr[o] <= (32'(gnt_i[o]) == NP - 1) ? '0 : gnt_i[o] + 1'b1;
      fwd_count   <= fwd_count + nf;
      block_count <= block_count + nb;
    end
  end

endmodule
