// tb_d2d_ni -- packetising and depacketising in the network interface.
//
// Transmit: random transactions with random network back-pressure. Every packet must
// leave as head, body, body, tail, with the destination, this interface's own address
// as source, a zero hop count and the words in order. With no back-pressure the head
// must leave in the cycle after acceptance, and the whole packet in PKT_FLITS cycles.
// Receive: random packets fed flit by flit with random gaps and a randomly ready core.
// Each must be offered once, whole, with its source and hop count. No flit may be
// taken while a finished transaction waits.
module tb_d2d_ni;
  import d2d_pkg::*;

  localparam int         PKT  = 4;
  localparam core_addr_t SELF = core_addr_t'(5'd9);

  logic              clk = 0, rst_n = 0;
  logic              tx_valid = 0, tx_ready;
  core_addr_t        tx_dest;
  logic [DATA_W-1:0] tx_data [PKT];
  logic              rx_valid, rx_ready = 0;
  core_addr_t        rx_src;
  logic [DATA_W-1:0] rx_data [PKT];
  logic [HOP_W-1:0]  rx_hops;
  logic              net_out_valid, net_out_ready = 0;
  flit_t             net_out_flit;
  logic              net_in_valid = 0, net_in_ready;
  flit_t             net_in_flit;

  d2d_ni #(.SELF(SELF), .PKT_FLITS(PKT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask

  // ---------------- transmit side
  typedef struct { core_addr_t dest; logic [DATA_W-1:0] w [PKT]; } txn_t;
  txn_t tx_q [$];
  int   tx_flit_idx = 0, tx_pkts = 0;
  bit   tx_bp = 1;

  always @(posedge clk) if (rst_n) begin
    if (net_out_valid && net_out_ready) begin
      check(tx_q.size() > 0, "flit without transaction");
      if (tx_q.size() > 0) begin
        check(net_out_flit.kind == ((tx_flit_idx == 0) ? FLIT_HEAD : (tx_flit_idx == PKT - 1) ? FLIT_TAIL : FLIT_BODY),
              "flit kind sequence");
        check(net_out_flit.dest == tx_q[0].dest && net_out_flit.src == SELF && net_out_flit.hops == '0, "flit header");
        check(net_out_flit.data == tx_q[0].w[tx_flit_idx], "flit data");
        if (tx_flit_idx == PKT - 1) begin tx_flit_idx = 0; void'(tx_q.pop_front()); tx_pkts++; end
        else tx_flit_idx++;
      end
    end
    net_out_ready <= tx_bp ? ($urandom_range(2, 0) != 0) : 1'b1;
  end

  initial begin : tx_proc
    txn_t t;
    int c0;
    tx_dest = '0;
    for (int w = 0; w < PKT; w++) tx_data[w] = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      if (i == 250) begin tx_bp = 0; repeat (4) @(negedge clk); end
      t.dest = core_addr_t'($urandom);
      for (int w = 0; w < PKT; w++) t.w[w] = $urandom;
      tx_valid = 1; tx_dest = t.dest; tx_data = t.w;
      while (!tx_ready) @(negedge clk);
      tx_q.push_back(t);
      @(negedge clk);
      tx_valid = 0;
      c0 = 0;
      if (i >= 250) begin
        // no back-pressure: head now, tail PKT-1 cycles later, then ready again
        check(net_out_valid && net_out_flit.kind == FLIT_HEAD, "head right after acceptance");
        while (!tx_ready) begin @(negedge clk); c0++; end
        check(c0 == PKT, $sformatf("packet takes %0d cycles", c0));
      end
    end
  end

  // ---------------- receive side
  txn_t rx_q [$];
  int   rx_pkts = 0, rx_hold = 0;

  always @(posedge clk) if (rst_n) begin
    if (rx_valid && !rx_ready) begin
      rx_hold++;
      check(!net_in_ready, "no flit accepted while a transaction waits");
    end
    if (rx_valid && rx_ready) begin
      check(rx_q.size() > 0, "transaction without packet");
      if (rx_q.size() > 0) begin
        check(rx_src == rx_q[0].dest, "received source");
        check(int'(rx_hops) == int'(rx_q[0].dest) % 7 + 1, "received hop count");
        for (int w = 0; w < PKT; w++) check(rx_data[w] == rx_q[0].w[w], "received word");
        void'(rx_q.pop_front());
      end
      rx_pkts++;
    end
    rx_ready <= ($urandom_range(1, 0) == 1);
  end

  initial begin : rx_proc
    txn_t t;
    net_in_flit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      t.dest = core_addr_t'($urandom);   // used as the packet's source here
      for (int w = 0; w < PKT; w++) t.w[w] = $urandom;
      rx_q.push_back(t);
      for (int f = 0; f < PKT; f++) begin
        while ($urandom_range(3, 0) == 0) begin net_in_valid = 0; @(negedge clk); end
        net_in_valid = 1;
        net_in_flit.kind = (f == 0) ? FLIT_HEAD : (f == PKT - 1) ? FLIT_TAIL : FLIT_BODY;
        net_in_flit.dest = SELF;
        net_in_flit.src  = t.dest;
        net_in_flit.hops = HOP_W'(int'(t.dest) % 7 + 1);
        net_in_flit.data = t.w[f];
        // net_in_ready is a register output: stable between edges
        while (!net_in_ready) @(negedge clk);
        @(negedge clk);
      end
      net_in_valid = 0;
    end
    repeat (20) @(negedge clk);
    check(rx_pkts == 300, $sformatf("received %0d of 300", rx_pkts));
    check(tx_pkts == 300, $sformatf("sent %0d of 300", tx_pkts));
    check(rx_hold > 0, "receive back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
