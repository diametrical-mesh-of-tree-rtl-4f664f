// tb_d2d_mot_noc -- end-to-end test of the full 4x4 D2D-MoT network at its default sizes.
//
// The bench builds its own picture of the topology as an edge list written from leaf
// coordinates: row and column trees, diagonal links inside each 2x2 module, and the
// two links between opposite internal roots. It checks the counts (40 routers, 58
// links, degrees 5/3/3/2). It computes all-pairs hop distances with Floyd-Warshall.
// Then it runs three phases:
//   1. isolated packets: every core sends one packet to every core, itself included,
//      one at a time. The bench checks data, source, hop count (shortest path + 1
//      routers) and latency (2*routers + PKT_FLITS - 1 cycles, from acceptance to
//      delivery);
//   2. all-to-all: every core sends to all 31 others at once, in a shuffled order,
//      while the receivers take packets only on random cycles. Every packet must arrive
//      once, intact, over a shortest path;
//   3. hot spot: all cores send to core 0, which makes outputs contend.
// It counts how often each mechanism was used: diagonal links, diametrical root links,
// row and column trees, ejection to core 0 and core 1, link stalls, receive
// back-pressure, contention at an output port. A mechanism never seen counts as a
// failure.
module tb_d2d_mot_noc;
  import d2d_pkg::*;

  localparam int PKT = 4;
  localparam int NC  = 32;

  logic              clk = 0;
  logic              rst_n = 0;
  logic              tx_valid [NC];
  logic              tx_ready [NC];
  core_addr_t        tx_dest  [NC];
  logic [DATA_W-1:0] tx_data  [NC][PKT];
  logic              rx_valid [NC];
  logic              rx_ready [NC];
  core_addr_t        rx_src   [NC];
  logic [DATA_W-1:0] rx_data  [NC][PKT];
  logic [HOP_W-1:0]  rx_hops  [NC];

  d2d_mot_noc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------ reference topology
  int adj [40][40];
  int refd [40][40];
  int nedges = 0;
  function automatic int leaf(int r, int c); return 4 * r + c; endfunction
  function automatic int rstem(int r, int h); return 16 + 2 * r + h; endfunction
  function automatic int cstem(int c, int h); return 24 + 2 * c + h; endfunction
  task automatic edge_add(int a, int b);
    adj[a][b] = 1; adj[b][a] = 1; nedges++;
  endtask

  initial begin
    for (int a = 0; a < 40; a++) for (int b = 0; b < 40; b++) adj[a][b] = 0;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) begin
        edge_add(leaf(r, c), rstem(r, c / 2));
        edge_add(leaf(r, c), cstem(c, r / 2));
      end
    for (int mr = 0; mr < 2; mr++)
      for (int mc = 0; mc < 2; mc++) begin
        edge_add(leaf(2 * mr, 2 * mc), leaf(2 * mr + 1, 2 * mc + 1));
        edge_add(leaf(2 * mr, 2 * mc + 1), leaf(2 * mr + 1, 2 * mc));
      end
    for (int i = 0; i < 4; i++)
      for (int h = 0; h < 2; h++) begin
        edge_add(rstem(i, h), 32 + i);
        edge_add(cstem(i, h), 36 + i);
      end
    edge_add(33, 34);
    edge_add(37, 38);
    for (int a = 0; a < 40; a++)
      for (int b = 0; b < 40; b++)
        refd[a][b] = (a == b) ? 0 : (adj[a][b] ? 1 : 1000);
    for (int k = 0; k < 40; k++)
      for (int a = 0; a < 40; a++)
        for (int b = 0; b < 40; b++)
          if (refd[a][k] + refd[k][b] < refd[a][b]) refd[a][b] = refd[a][k] + refd[k][b];
  end

  function automatic logic [DATA_W-1:0] word(int s, int d, int seq, int w);
    return {8'(s), 8'(d), 8'(seq), 8'(w)};
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_diag = 0, n_diam = 0, n_row = 0, n_col = 0, n_core0 = 0, n_core1 = 0;
  int n_stall = 0, n_rx_bp = 0, n_contend = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < 40; n++) begin
      for (int p = 0; p < 5; p++) begin
        if (dut.ro_valid[n][p] && dut.ro_ready[n][p] && is_head(dut.ro_flit[n][p].kind)) begin
          if (n < 16 && p == 4) n_diag++;
          if (n < 16 && p == 2) n_row++;
          if (n < 16 && p == 3) n_col++;
          if (n < 16 && p == 0) n_core0++;
          if (n < 16 && p == 1) n_core1++;
          if ((n == 33 || n == 34 || n == 37 || n == 38) && p == 2) n_diam++;
        end
        if (dut.ro_valid[n][p] && !dut.ro_ready[n][p]) n_stall++;
      end
    end
    for (int k = 0; k < NC; k++) if (rx_valid[k] && !rx_ready[k]) n_rx_bp++;
  end
  // Contention: two packet heads in one router's input buffers that want the same output.
  for (genvar n = 0; n < 40; n++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      int cnt [5];
      for (int o = 0; o < 5; o++) cnt[o] = 0;
      for (int i = 0; i < num_ports(n); i++)
        if (dut.g_node[n].u_router.f_valid[i] && is_head(dut.g_node[n].u_router.f_flit[i].kind))
          cnt[dut.g_node[n].u_router.want[i]]++;
      for (int o = 0; o < 5; o++) if (cnt[o] > 1) n_contend++;
    end
  end

  // ------------------------------------------------------------ scoreboard (phases 2, 3)
  int phase = 0;
  int got [NC][NC];
  int received = 0;
  bit accepted [NC];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NC; k++) accepted[k] = tx_valid[k] && tx_ready[k];
    if (phase >= 2) begin
      for (int k = 0; k < NC; k++) if (rx_valid[k] && rx_ready[k]) begin
        int s, seq;
        s   = int'(rx_src[k]);
        seq = int'(rx_data[k][0][15:8]);
        received++;
        got[s][k]++;
        check(int'(rx_hops[k]) == refd[s / 2][k / 2] + 1, $sformatf("hops %0d->%0d = %0d", s, k, rx_hops[k]));
        for (int w = 0; w < PKT; w++)
          check(rx_data[k][w] == word(s, k, seq, w), $sformatf("data %0d->%0d word %0d", s, k, w));
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  int order [NC][NC - 1];
  int next_i [NC];

  initial begin
    int lat, h, sent, t0, tmp, j, hs;
    for (int k = 0; k < NC; k++) begin
      tx_valid[k] = 0; tx_dest[k] = '0; rx_ready[k] = 1;
      for (int w = 0; w < PKT; w++) tx_data[k][w] = '0;
      for (int d = 0; d < NC; d++) got[k][d] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // topology sanity (Table I of the paper)
    check(nedges == NUM_LINKS, "58 links");
    for (int n = 0; n < 40; n++) begin
      int deg;
      deg = 0;
      for (int m = 0; m < 40; m++) deg += adj[n][m];
      if (n < 16) deg += 2;  // two cores per leaf
      check(deg == num_ports(n), $sformatf("degree of node %0d", n));
      check(deg == ((n < 16) ? 5 : (n < 32) ? 3 : (n == 33 || n == 34 || n == 37 || n == 38) ? 3 : 2),
            $sformatf("Table I degree of node %0d", n));
    end

    // ---- phase 1: isolated packets, every (source, destination) pair
    phase = 1;
    for (int s = 0; s < NC; s++) begin
      for (int d = 0; d < NC; d++) begin
        tx_valid[s] = 1;
        tx_dest[s]  = core_addr_t'(d);
        for (int w = 0; w < PKT; w++) tx_data[s][w] = word(s, d, 0, w);
        t0 = int'(cyc) + 1;   // edge that accepts the transaction (the interface is idle)
        @(negedge clk);
        tx_valid[s] = 0;
        tmp = 0;
        while (!rx_valid[d] && tmp < 100) begin @(negedge clk); tmp++; end
        h   = refd[s / 2][d / 2] + 1;
        lat = int'(cyc) - t0;
        check(rx_valid[d], $sformatf("delivery %0d->%0d", s, d));
        check(lat == 2 * h + PKT - 1, $sformatf("latency %0d->%0d: %0d, expected %0d", s, d, lat, 2 * h + PKT - 1));
        check(int'(rx_hops[d]) == h, $sformatf("hops %0d->%0d", s, d));
        check(int'(rx_src[d]) == s, $sformatf("source %0d->%0d", s, d));
        for (int w = 0; w < PKT; w++)
          check(rx_data[d][w] == word(s, d, 0, w), $sformatf("data %0d->%0d", s, d));
        @(negedge clk);
      end
    end
    $display("phase 1 done at cycle %0d", cyc);

    // ---- phase 2: all-to-all with random receive back-pressure
    phase = 2;
    for (int s = 0; s < NC; s++) begin
      j = 0;
      for (int d = 0; d < NC; d++) if (d != s) begin order[s][j] = d; j++; end
      for (int i = NC - 2; i > 0; i--) begin
        j = $urandom_range(i, 0);
        tmp = order[s][i]; order[s][i] = order[s][j]; order[s][j] = tmp;
      end
      next_i[s] = 0;
    end
    t0 = int'(cyc);
    sent = 0;
    while (received < NC * (NC - 1) && int'(cyc) - t0 < 50000) begin
      for (int k = 0; k < NC; k++) begin
        if (accepted[k]) begin tx_valid[k] = 0; next_i[k]++; sent++; accepted[k] = 0; end
        if (!tx_valid[k] && next_i[k] < NC - 1) begin
          tx_valid[k] = 1;
          tx_dest[k]  = core_addr_t'(order[k][next_i[k]]);
          for (int w = 0; w < PKT; w++) tx_data[k][w] = word(k, order[k][next_i[k]], next_i[k], w);
        end
        rx_ready[k] = ($urandom_range(99, 0) < 60);
      end
      @(negedge clk);
    end
    for (int k = 0; k < NC; k++) rx_ready[k] = 1;
    $display("phase 2: all-to-all, %0d packets delivered in %0d cycles", received, int'(cyc) - t0);
    check(received == NC * (NC - 1), "all-to-all complete");
    for (int s = 0; s < NC; s++)
      for (int d = 0; d < NC; d++)
        check(got[s][d] == ((s != d) ? 1 : 0), $sformatf("pair %0d->%0d delivered once", s, d));

    // ---- phase 3: hot spot, everybody to core 0
    phase = 3;
    hs = received;
    for (int k = 1; k < NC; k++) begin
      tx_valid[k] = 1;
      tx_dest[k]  = core_addr_t'(0);
      for (int w = 0; w < PKT; w++) tx_data[k][w] = word(k, 0, 200, w);
    end
    t0 = int'(cyc);
    while (received < hs + NC - 1 && int'(cyc) - t0 < 5000) begin
      @(negedge clk);
      for (int k = 1; k < NC; k++) if (accepted[k]) begin tx_valid[k] = 0; accepted[k] = 0; end
    end
    check(received == hs + NC - 1, "hot spot complete");
    $display("phase 3: hot spot, %0d packets into core 0 in %0d cycles", received - hs, int'(cyc) - t0);

    repeat (5) @(negedge clk);
    $display("mechanisms: diagonal=%0d diametrical=%0d row_tree=%0d col_tree=%0d core0=%0d core1=%0d link_stall=%0d rx_backpressure=%0d contention=%0d",
             n_diag, n_diam, n_row, n_col, n_core0, n_core1, n_stall, n_rx_bp, n_contend);
    check(n_diag > 0, "diagonal links used");
    check(n_diam > 0, "diametrical root links used");
    check(n_row > 0, "row trees used");
    check(n_col > 0, "column trees used");
    check(n_core0 > 0 && n_core1 > 0, "both core ports used");
    check(n_stall > 0, "link stall seen");
    check(n_rx_bp > 0, "receive back-pressure seen");
    check(n_contend > 0, "output contention seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
