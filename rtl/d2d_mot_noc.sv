// d2d_mot_noc -- the 4x4 Diametrical 2D Mesh-of-Tree network-on-chip (top level).
//
// The top level has 40 routers (16 leaf, 16 stem, 8 root), 116 one-way links (the 58
// bidirectional links of the topology) and 32 network interfaces, one per IP core. Two
// cores hang on each leaf router. The wiring is generated from the topology functions
// in d2d_pkg. Port p of router n is joined to port peer_port(n,p) of router
// peer_node(n,p) by two d2d_link instances, one per direction. Leaf ports 0 and 1 go
// to the network interfaces of cores 2n and 2n+1.
//
// Core k has the 5-bit address k = {row, col, core}, where 4*row+col is its leaf. Each
// core has a transmit port (destination and PKT_FLITS words, valid/ready) and a
// receive port (source, words and hop count, valid/ready). The cores themselves are
// outside this design.
//
// Timing with the defaults and no contention: the transmitting interface drives the
// head flit in the cycle after it accepts the transaction. Each router adds one cycle
// and each link stage another. A packet that crosses h routers therefore reaches the
// receiving interface 2h-1 cycles after the head leaves the source interface. The
// remaining flits follow one per cycle. The hop count delivered with a packet is the
// number of routers it crossed. By construction of the routing tables, that is the
// shortest path through the topology.
//
// The topology, the router levels and the port counts follow the paper. The packet
// length, buffer depth, link stages and addresses are this design's choices.
module d2d_mot_noc
  import d2d_pkg::*;
#(
  parameter int unsigned PKT_FLITS   = 4,
  parameter int unsigned BUF_DEPTH   = 4,
  parameter int unsigned LINK_STAGES = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tx_valid [NUM_CORES],
  output logic              tx_ready [NUM_CORES],
  input  core_addr_t        tx_dest  [NUM_CORES],
  input  logic [DATA_W-1:0] tx_data  [NUM_CORES][PKT_FLITS],
  output logic              rx_valid [NUM_CORES],
  input  logic              rx_ready [NUM_CORES],
  output core_addr_t        rx_src   [NUM_CORES],
  output logic [DATA_W-1:0] rx_data  [NUM_CORES][PKT_FLITS],
  output logic [HOP_W-1:0]  rx_hops  [NUM_CORES]
);

  // Router-side signals: ri_* into router n port p, ro_* out of router n port p.
  logic  ri_valid [NUM_NODES][MAX_PORTS];
  logic  ri_ready [NUM_NODES][MAX_PORTS];
  flit_t ri_flit  [NUM_NODES][MAX_PORTS];
  logic  ro_valid [NUM_NODES][MAX_PORTS];
  logic  ro_ready [NUM_NODES][MAX_PORTS];
  flit_t ro_flit  [NUM_NODES][MAX_PORTS];

  for (genvar n = 0; n < NUM_NODES; n++) begin : g_node
    d2d_router #(.NODE(n), .BUF_DEPTH(BUF_DEPTH)) u_router (
      .clk, .rst_n,
      .in_valid  (ri_valid[n]),
      .in_ready  (ri_ready[n]),
      .in_flit   (ri_flit[n]),
      .out_valid (ro_valid[n]),
      .out_ready (ro_ready[n]),
      .out_flit  (ro_flit[n])
    );

    for (genvar p = 0; p < MAX_PORTS; p++) begin : g_port
      localparam int M = peer_node(n, p);
      localparam int Q = peer_port(n, p);
      if (p >= num_ports(n)) begin : g_none
        assign ri_valid[n][p] = 1'b0;
        assign ri_flit[n][p]  = '0;
        assign ro_ready[n][p] = 1'b0;
      end else if (M >= 0) begin : g_link
        // one direction per port: n.p -> M.Q (the reverse link belongs to M.Q)
        d2d_link #(.STAGES(LINK_STAGES)) u_link (
          .clk, .rst_n,
          .in_valid  (ro_valid[n][p]),
          .in_ready  (ro_ready[n][p]),
          .in_flit   (ro_flit[n][p]),
          .out_valid (ri_valid[M][Q]),
          .out_ready (ri_ready[M][Q]),
          .out_flit  (ri_flit[M][Q])
        );
      end else begin : g_core
        localparam int K = 2 * n + p;
        d2d_ni #(.SELF(core_addr_t'(K)), .PKT_FLITS(PKT_FLITS)) u_ni (
          .clk, .rst_n,
          .tx_valid      (tx_valid[K]),
          .tx_ready      (tx_ready[K]),
          .tx_dest       (tx_dest[K]),
          .tx_data       (tx_data[K]),
          .rx_valid      (rx_valid[K]),
          .rx_ready      (rx_ready[K]),
          .rx_src        (rx_src[K]),
          .rx_data       (rx_data[K]),
          .rx_hops       (rx_hops[K]),
          .net_out_valid (ri_valid[n][p]),
          .net_out_ready (ri_ready[n][p]),
          .net_out_flit  (ri_flit[n][p]),
          .net_in_valid  (ro_valid[n][p]),
          .net_in_ready  (ro_ready[n][p]),
          .net_in_flit   (ro_flit[n][p])
        );
      end
    end
  end

endmodule
