// torus_network: the global communication network, a torus of routers.
//
// Instantiates RADIX^NDIM torus_router instances and wires each one's "+"
// and "-" outputs of every dimension to the matching inputs of its ring
// neighbours, with wrap-around links closing every ring. Node n's router
// has address n; digit d of the address is its coordinate in dimension d.
// The nodes see only the local port of their router: inject (valid/ready)
// and eject (valid/ready).
//
// Follows the paper: nodes on a toroidal packet network for single-element
// messages, 6 dimensions in the architecture and a 1D ring of 8 nodes in the
// prototype. The parameters choose the shape; the router is this design's.
module torus_network
  import gp_pkg::*;
#(
  parameter int unsigned NDIM       = 1,
  parameter int unsigned RADIX      = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NN        = RADIX ** NDIM,
  localparam int unsigned NP        = 2 * NDIM + 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inj_valid [NN],
  output logic  inj_ready [NN],
  input  pkt_t  inj_pkt   [NN],
  output logic  ej_valid  [NN],
  input  logic  ej_ready  [NN],
  output pkt_t  ej_pkt    [NN],
  output logic [31:0] fwd_count   [NN],
  output logic [31:0] block_count [NN]
);

  localparam int unsigned LB = (RADIX > 1) ? $clog2(RADIX) : 1;

  function automatic int unsigned nbr(int unsigned n, int unsigned d, bit plus);
    int unsigned dig, nd;
    dig = (n >> (d * LB)) % RADIX;
    nd  = plus ? (dig + 1) % RADIX : (dig + RADIX - 1) % RADIX;
    return n - (dig << (d * LB)) + (nd << (d * LB));
  endfunction

  logic in_valid   [NN][NP];
  pkt_t in_pkt     [NN][NP];
  logic in_space1  [NN][NP];
  logic in_space2  [NN][NP];
  logic out_valid  [NN][NP];
  pkt_t out_pkt    [NN][NP];
  logic out_space1 [NN][NP];
  logic out_space2 [NN][NP];

  for (genvar n = 0; n < NN; n++) begin : g_node
    torus_router #(.NDIM(NDIM), .RADIX(RADIX), .FIFO_DEPTH(FIFO_DEPTH)) u_router (
      .clk, .rst_n,
      .my_id      (node_t'(n)),
      .in_valid   (in_valid[n]),
      .in_pkt     (in_pkt[n]),
      .in_space1  (in_space1[n]),
      .in_space2  (in_space2[n]),
      .out_valid  (out_valid[n]),
      .out_pkt    (out_pkt[n]),
      .out_space1 (out_space1[n]),
      .out_space2 (out_space2[n]),
      .fwd_count  (fwd_count[n]),
      .block_count(block_count[n])
    );

    // local port
    assign in_valid[n][0]   = inj_valid[n] && in_space1[n][0];
    assign in_pkt[n][0]     = inj_pkt[n];
    assign inj_ready[n]     = in_space1[n][0];
    assign ej_valid[n]      = out_valid[n][0];
    assign ej_pkt[n]        = out_pkt[n][0];
    assign out_space1[n][0] = ej_ready[n];
    assign out_space2[n][0] = ej_ready[n];

    for (genvar d = 0; d < NDIM; d++) begin : g_dim
      localparam int unsigned NP_ = nbr(n, d, 1'b1);   // + neighbour
      localparam int unsigned NM_ = nbr(n, d, 1'b0);   // - neighbour
      // packets travelling + arrive from the - neighbour's + output
      assign in_valid[n][1+2*d]   = out_valid[NM_][1+2*d];
      assign in_pkt[n][1+2*d]     = out_pkt[NM_][1+2*d];
      assign out_space1[n][1+2*d] = in_space1[NP_][1+2*d];
      assign out_space2[n][1+2*d] = in_space2[NP_][1+2*d];
      // packets travelling - arrive from the + neighbour's - output
      assign in_valid[n][2+2*d]   = out_valid[NP_][2+2*d];
      assign in_pkt[n][2+2*d]     = out_pkt[NP_][2+2*d];
      assign out_space1[n][2+2*d] = in_space1[NM_][2+2*d];
      assign out_space2[n][2+2*d] = in_space2[NM_][2+2*d];
    end
  end

endmodule
