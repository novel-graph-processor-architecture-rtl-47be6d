// gp_system: the parallel graph processor - node processors on a torus.
//
// NN = RADIX^NDIM node processors, each attached to its router of a toroidal
// packet network (the global communication network) and to the global
// control bus. Large sparse matrices are spread over the nodes; each node
// works on its share with its accelerator modules, and elements or partial
// products that belong elsewhere travel as single-element messages. The
// default shape is the built prototype: 8 nodes on a one-dimensional torus
// (ring); NDIM = 6 gives the six-dimensional torus of the architecture.
//
// Global control bus: the global control processor (outside this design)
// addresses one node (gcb_node) or all nodes (gcb_bcast, writes only) and
// reads or writes that node's control registers or memory. Read data
// returns one clock later on gcb_rdata with gcb_rvalid.
// Node memory: each node's memory (DDR3 SDRAM in the prototype) is outside
// this design and attached through the mem_* port arrays: two asynchronous
// read ports and one write port per node.
// Addressing requires RADIX to be a power of two, so that a node address is
// the low bits of a row or column index.
module gp_system
  import gp_pkg::*;
#(
  parameter int unsigned NDIM       = 1,
  parameter int unsigned RADIX      = 8,
  parameter int unsigned K          = 32,
  parameter int unsigned SORT_DEPTH = 1024,
  parameter int unsigned TX_SLOTS   = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned ADDR_W     = 32,
  localparam int unsigned NN        = RADIX ** NDIM
) (
  input  logic              clk,
  input  logic              rst_n,
  // global control bus
  input  logic              gcb_valid,
  input  logic              gcb_we,
  input  logic              gcb_bcast,
  input  node_t             gcb_node,
  input  logic [ADDR_W:0]   gcb_addr,
  input  elem_t             gcb_wdata,
  output elem_t             gcb_rdata,
  output logic              gcb_rvalid,
  // node memories
  output logic [ADDR_W-1:0] mem_rd_addr [NN],
  input  elem_t             mem_rd_data [NN],
  output logic [ADDR_W-1:0] mem_pt_addr [NN],
  input  elem_t             mem_pt_data [NN],
  output logic              mem_wr_en   [NN],
  output logic [ADDR_W-1:0] mem_wr_addr [NN],
  output elem_t             mem_wr_data [NN],
  // network statistics
  output logic [31:0]       net_fwd_count   [NN],
  output logic [31:0]       net_block_count [NN]
);

  logic  inj_valid [NN], inj_ready [NN], ej_valid [NN], ej_ready [NN];
  pkt_t  inj_pkt [NN], ej_pkt [NN];
  elem_t cb_rdata [NN];
  logic  cb_rvalid [NN];

  torus_network #(.NDIM(NDIM), .RADIX(RADIX), .FIFO_DEPTH(FIFO_DEPTH)) u_net (
    .clk, .rst_n,
    .inj_valid, .inj_ready, .inj_pkt,
    .ej_valid, .ej_ready, .ej_pkt,
    .fwd_count   (net_fwd_count),
    .block_count (net_block_count)
  );

  for (genvar n = 0; n < NN; n++) begin : g_node
    logic sel;
    assign sel = gcb_valid && ((gcb_bcast && gcb_we) || gcb_node == node_t'(n));

    node_processor #(.K(K), .SORT_DEPTH(SORT_DEPTH), .TX_SLOTS(TX_SLOTS), .ADDR_W(ADDR_W)) u_node (
      .clk, .rst_n,
      .node_id     (node_t'(n)),
      .dest_mask   (node_t'(NN - 1)),
      .cb_sel      (sel),
      .cb_we       (gcb_we),
      .cb_addr     (gcb_addr),
      .cb_wdata    (gcb_wdata),
      .cb_rdata    (cb_rdata[n]),
      .cb_rvalid   (cb_rvalid[n]),
      .mem_rd_addr (mem_rd_addr[n]),
      .mem_rd_data (mem_rd_data[n]),
      .mem_pt_addr (mem_pt_addr[n]),
      .mem_pt_data (mem_pt_data[n]),
      .mem_wr_en   (mem_wr_en[n]),
      .mem_wr_addr (mem_wr_addr[n]),
      .mem_wr_data (mem_wr_data[n]),
      .inj_valid   (inj_valid[n]),
      .inj_ready   (inj_ready[n]),
      .inj_pkt     (inj_pkt[n]),
      .ej_valid    (ej_valid[n]),
      .ej_ready    (ej_ready[n]),
      .ej_pkt      (ej_pkt[n])
    );
  end

  // read return: only the addressed node answers a read
  always_comb begin
    gcb_rdata  = '0;
    gcb_rvalid = 1'b0;
    for (int n = 0; n < NN; n++)
      if (cb_rvalid[n]) begin
        gcb_rdata  = cb_rdata[n];
        gcb_rvalid = 1'b1;
      end
  end

endmodule
