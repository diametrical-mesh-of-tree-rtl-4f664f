// d2d_router -- wormhole switch of the D2D-MoT network (leaf, stem or root).
//
// One module serves the three router levels of the network. NODE selects the router.
// The router's number of ports follows from it: 5 for a leaf, 3 for a stem or an
// internal root, 2 for an external root. The port arrays are always MAX_PORTS wide,
// and the ports above the router's count are unused (outputs held at zero, inputs
// ignored). The ports are numbered as in d2d_pkg.
//
// Datapath, per the switch of the paper's basic-components figure (buffers, routing,
// arbitration, crossbar):
//   * input buffer: one d2d_fifo of BUF_DEPTH flits per port;
//   * routing: a d2d_route look-up on the head flit of each buffer. The result is
//     kept in a register for the body and tail flits of the same packet;
//   * arbitration: one d2d_arbiter per output port. An output that sends a head flit
//     is locked to that input until the tail flit has passed (wormhole switching);
//   * crossbar: a multiplexer per output port, which also adds one to the hop count.
// Handshake: valid/ready on every port. A flit moves when valid and ready are both
// high at a clock edge. `in_ready` is the registered not-full flag of the input
// buffer. Timing: a flit written into an input buffer at edge t can leave on an output
// in the cycle after that edge, so a router adds one cycle per hop when nothing
// contends.
//
// The topology and the port counts follow the paper. Wormhole switching, the
// handshake, the buffer depth and the round-robin arbitration are this design's
// choices: the paper is silent on the inside of the switch.
module d2d_router
  import d2d_pkg::*;
#(
  parameter int unsigned NODE      = 0,
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid  [MAX_PORTS],
  output logic  in_ready  [MAX_PORTS],
  input  flit_t in_flit   [MAX_PORTS],
  output logic  out_valid [MAX_PORTS],
  input  logic  out_ready [MAX_PORTS],
  output flit_t out_flit  [MAX_PORTS]
);

  localparam int unsigned NP = num_ports(int'(NODE));

  logic              f_valid [NP];
  logic              f_pop   [NP];
  flit_t             f_flit  [NP];
  logic [PORT_W-1:0] rt_port [NP];
  logic [PORT_W-1:0] route_q [NP];
  logic [PORT_W-1:0] want    [NP];

  logic [NP-1:0]     req     [NP];   // req[o][i]: input i asks for output o
  logic [NP-1:0]     arb_gnt [NP];
  logic [NP-1:0]     sel     [NP];
  logic              fire    [NP];
  logic              locked  [NP];
  logic [PORT_W-1:0] owner   [NP];

  // ---------------------------------------------------------------- input side
  for (genvar i = 0; i < NP; i++) begin : g_in
    d2d_fifo #(.T(flit_t), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_valid (in_valid[i]),
      .wr_ready (in_ready[i]),
      .wr_data  (in_flit[i]),
      .rd_valid (f_valid[i]),
      .rd_ready (f_pop[i]),
      .rd_data  (f_flit[i])
    );

    d2d_route #(.NODE(NODE)) u_route (
      .dest     (f_flit[i].dest),
      .out_port (rt_port[i])
    );

    assign want[i] = is_head(f_flit[i].kind) ? rt_port[i] : route_q[i];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                       route_q[i] <= '0;
      else if (f_pop[i] && f_flit[i].kind == FLIT_HEAD) route_q[i] <= rt_port[i];
    end
  end

  for (genvar i = NP; i < MAX_PORTS; i++) begin : g_unused_in
    assign in_ready[i] = 1'b0;
  end

  // ---------------------------------------------------------------- requests
  always_comb begin
    for (int o = 0; o < NP; o++) begin
      for (int i = 0; i < NP; i++) begin
        req[o][i] = f_valid[i] && (want[i] == PORT_W'(o)) &&
                    (locked[o] ? (owner[o] == PORT_W'(i)) : is_head(f_flit[i].kind));
      end
    end
  end

  // ---------------------------------------------------------------- output side
  for (genvar o = 0; o < NP; o++) begin : g_out
    d2d_arbiter #(.N(NP)) u_arb (
      .clk, .rst_n,
      .req     (req[o]),
      .advance (fire[o] && !locked[o]),
      .grant   (arb_gnt[o])
    );

    assign sel[o] = locked[o] ? req[o] : arb_gnt[o];

    always_comb begin
      out_valid[o] = (sel[o] != '0);
      out_flit[o]  = '0;
      for (int i = 0; i < NP; i++) begin
        if (sel[o][i]) begin
          out_flit[o]      = f_flit[i];
          out_flit[o].hops = f_flit[i].hops + 1'b1;
        end
      end
    end

    assign fire[o] = out_valid[o] && out_ready[o];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        locked[o] <= 1'b0;
        owner[o]  <= '0;
      end else if (fire[o]) begin
        if (out_flit[o].kind == FLIT_HEAD) begin
          locked[o] <= 1'b1;
          for (int i = 0; i < NP; i++)
            if (sel[o][i]) owner[o] <= PORT_W'(i);
        end else if (is_tail(out_flit[o].kind)) begin
          locked[o] <= 1'b0;
        end
      end
    end

    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
      !(sel[o][o] && NODE >= NUM_LEAVES));
  end

  for (genvar o = NP; o < MAX_PORTS; o++) begin : g_unused_out
    assign out_valid[o] = 1'b0;
    assign out_flit[o]  = '0;
  end

  // An input is popped by at most one output, and only when that output fires.
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      f_pop[i] = 1'b0;
      for (int o = 0; o < NP; o++)
        if (sel[o][i] && out_ready[o]) f_pop[i] = 1'b1;
    end
  end

endmodule
