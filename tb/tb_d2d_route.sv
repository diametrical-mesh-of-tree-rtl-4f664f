// tb_d2d_route -- checks the routing unit of all 40 routers.
//
// One d2d_route per router. For each router and each of the 32 destination cores the
// bench checks: at the destination leaf, the core bit picks port 0 or 1; elsewhere the
// chosen port exists and leads to a router one hop closer to the destination leaf; at a
// leaf where the diagonal link lies on a shortest path, it is the one chosen (the
// paper's preference for the diametrical channel), and after it the row tree. It then
// follows every leaf-to-leaf route through the tables and checks that it ends at the
// destination in the shortest number of hops. Last, it builds the channel dependency
// graph of those routes: one node per router output port, and an edge from a channel
// to the next channel of the same route. It checks by topological sort that the graph
// has no cycle. With wormhole switching and one virtual channel, no cycle means no
// deadlock.
module tb_d2d_route;
  import d2d_pkg::*;
  import tb_topo_pkg::*;

  core_addr_t        dest;
  logic [PORT_W-1:0] port [40];

  for (genvar n = 0; n < 40; n++) begin : g_r
    d2d_route #(.NODE(n)) dut (.dest(dest), .out_port(port[n]));
  end

  int checks = 0, failures = 0;
  topo_t t;
  int lut [40][32];
  bit dep [200][200];   // channel n*5+p -> channel m*5+q

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    int p, m, dl, n, hops;
    t = build();
    for (int k = 0; k < 32; k++) begin
      dest = core_addr_t'(k);
      #1;
      for (int i = 0; i < 40; i++) lut[i][k] = int'(port[i]);
    end
    for (int i = 0; i < 40; i++) begin
      for (int k = 0; k < 32; k++) begin
        dl = k / 2;
        p  = lut[i][k];
        if (i == dl) begin
          check(p == k % 2, $sformatf("node %0d ejects core %0d on port %0d", i, k, p));
        end else begin
          m = (p < 5) ? t.nbr[i][p] : -1;
          check(m >= 0, $sformatf("node %0d dest %0d: port %0d exists", i, k, p));
          if (m >= 0)
            check(t.d[m][dl] == t.d[i][dl] - 1, $sformatf("node %0d dest %0d: port %0d is closer", i, k, p));
          if (i < 16 && t.d[t.nbr[i][4]][dl] == t.d[i][dl] - 1)
            check(p == 4, $sformatf("leaf %0d dest %0d prefers diagonal", i, k));
          else if (i < 16 && t.d[t.nbr[i][2]][dl] == t.d[i][dl] - 1)
            check(p == 2, $sformatf("leaf %0d dest %0d prefers row tree", i, k));
        end
      end
    end
    // walk every route
    for (int s = 0; s < 16; s++)
      for (int k = 0; k < 32; k++) begin
        n = s; hops = 0;
        while (n != k / 2 && hops < 20) begin
          p = lut[n][k];
          n = (p < 5 && t.nbr[n][p] >= 0) ? t.nbr[n][p] : n;
          hops++;
        end
        check(n == k / 2 && hops == t.d[s][k / 2], $sformatf("route leaf %0d -> core %0d: %0d hops", s, k, hops));
      end
    // channel dependency graph and topological sort (Kahn)
    begin
      int indeg [200];
      bit used [200], done [200];
      int prev, ch, removed, nused, progress;
      for (int a = 0; a < 200; a++) begin
        indeg[a] = 0; used[a] = 0; done[a] = 0;
        for (int b = 0; b < 200; b++) dep[a][b] = 0;
      end
      for (int s = 0; s < 16; s++)
        for (int dl = 0; dl < 16; dl++) begin
          n = s; prev = -1; hops = 0;
          while (hops < 20) begin
            p  = (n == dl) ? 0 : lut[n][2 * dl];
            ch = n * 5 + p;
            used[ch] = 1;
            if (prev >= 0) dep[prev][ch] = 1;
            prev = ch;
            if (n == dl) break;
            n = t.nbr[n][p];
            hops++;
          end
        end
      nused = 0;
      for (int a = 0; a < 200; a++) begin
        if (used[a]) nused++;
        for (int b = 0; b < 200; b++) if (dep[a][b]) indeg[b]++;
      end
      removed = 0;
      progress = 1;
      while (progress) begin
        progress = 0;
        for (int a = 0; a < 200; a++)
          if (used[a] && !done[a] && indeg[a] == 0) begin
            done[a] = 1; removed++; progress = 1;
            for (int b = 0; b < 200; b++) if (dep[a][b]) indeg[b]--;
          end
      end
      $display("channel dependency graph: %0d channels, %0d sorted", nused, removed);
      check(removed == nused, "channel dependency graph is acyclic (deadlock-free)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
