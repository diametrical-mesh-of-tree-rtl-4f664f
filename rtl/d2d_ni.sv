// d2d_ni -- network interface between one IP core and its leaf router.
//
// Transmit side (packetising): the core hands over one transaction, a destination core
// address and PKT_FLITS data words, with a valid/ready handshake. The interface stores
// it and sends it as a packet of PKT_FLITS flits: head, body..., tail. A one-word
// packet is a single flit of kind FLIT_SINGLE. Every flit carries the destination, the
// source (this core, SELF) and a hop count of zero. The next transaction is taken once
// the tail flit has left, so a packet goes out in PKT_FLITS cycles when the network
// does not stall it.
//
// Receive side (depacketising): flits from the leaf router are collected in order into
// a word array. When the tail flit arrives, the whole transaction is offered to the
// core: source, data words and the hop count the packet made. It stays offered until
// the core takes it, and meanwhile no flit is accepted from the network (back-pressure).
// The router keeps the flits of one packet together on the core port, so packets
// never interleave here.
//
// The paper states the function (transactions to packets to flits and back) but not
// how it is done. The packet length, the flit layout and the handshakes are this
// design's choices.
module d2d_ni
  import d2d_pkg::*;
#(
  parameter core_addr_t  SELF      = '0,
  parameter int unsigned PKT_FLITS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // core -> network
  input  logic              tx_valid,
  output logic              tx_ready,
  input  core_addr_t        tx_dest,
  input  logic [DATA_W-1:0] tx_data [PKT_FLITS],
  // network -> core
  output logic              rx_valid,
  input  logic              rx_ready,
  output core_addr_t        rx_src,
  output logic [DATA_W-1:0] rx_data [PKT_FLITS],
  output logic [HOP_W-1:0]  rx_hops,
  // leaf router port
  output logic              net_out_valid,
  input  logic              net_out_ready,
  output flit_t             net_out_flit,
  input  logic              net_in_valid,
  output logic              net_in_ready,
  input  flit_t             net_in_flit
);

  localparam int unsigned IDX_W = (PKT_FLITS > 1) ? $clog2(PKT_FLITS) : 1;

  // ------------------------------------------------------------- packetiser
  logic              tx_busy;
  logic [IDX_W-1:0]  tx_idx;
  core_addr_t        tx_dest_q;
  logic [DATA_W-1:0] tx_buf [PKT_FLITS];
  logic              tx_fire, tx_last;

  assign tx_ready = !tx_busy;
  assign tx_last  = (tx_idx == IDX_W'(PKT_FLITS - 1));
  assign tx_fire  = net_out_valid && net_out_ready;

  always_comb begin
    net_out_valid     = tx_busy;
    net_out_flit      = '0;
    net_out_flit.dest = tx_dest_q;
    net_out_flit.src  = SELF;
    net_out_flit.hops = '0;
    net_out_flit.data = tx_buf[tx_idx];
    if (PKT_FLITS == 1)    net_out_flit.kind = FLIT_SINGLE;
    else if (tx_idx == '0) net_out_flit.kind = FLIT_HEAD;
    else if (tx_last)      net_out_flit.kind = FLIT_TAIL;
    else                   net_out_flit.kind = FLIT_BODY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy   <= 1'b0;
      tx_idx    <= '0;
      tx_dest_q <= '0;
    end else if (!tx_busy) begin
      if (tx_valid) begin
        tx_busy   <= 1'b1;
        tx_idx    <= '0;
        tx_dest_q <= tx_dest;
      end
    end else if (tx_fire) begin
      if (tx_last) begin
        tx_busy <= 1'b0;
        tx_idx  <= '0;
      end else begin
        tx_idx <= tx_idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!tx_busy && tx_valid) tx_buf <= tx_data;
  end

  // ------------------------------------------------------------- depacketiser
  logic             rx_full;
  logic [IDX_W-1:0] rx_idx;
  logic             rx_fire;

  assign net_in_ready = !rx_full;
  assign rx_valid     = rx_full;
  assign rx_fire      = net_in_valid && net_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_full <= 1'b0;
      rx_idx  <= '0;
      rx_src  <= '0;
      rx_hops <= '0;
    end else begin
      if (rx_full && rx_ready) rx_full <= 1'b0;
      if (rx_fire) begin
        if (is_head(net_in_flit.kind)) begin
          rx_src  <= net_in_flit.src;
          rx_hops <= net_in_flit.hops;
        end
        if (is_tail(net_in_flit.kind)) begin
          rx_full <= 1'b1;
          rx_idx  <= '0;
        end else begin
          rx_idx <= rx_idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rx_fire) rx_data[rx_idx] <= net_in_flit.data;
  end

  // Packets arrive whole and in order, and only at their destination.
  a_rx_dest: assert property (@(posedge clk) disable iff (!rst_n)
    rx_fire |-> net_in_flit.dest == SELF);
  a_rx_head_first: assert property (@(posedge clk) disable iff (!rst_n)
    rx_fire && rx_idx == '0 |-> is_head(net_in_flit.kind));
  a_rx_tail_last: assert property (@(posedge clk) disable iff (!rst_n)
    rx_fire && rx_idx == IDX_W'(PKT_FLITS - 1) |-> is_tail(net_in_flit.kind));

endmodule
