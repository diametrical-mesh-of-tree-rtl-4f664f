// tb_router_harness -- drives and checks one D2D-MoT router with traffic on all ports.
//
// Every input port sends NPKT packets of 1 to 4 flits to random destination cores,
// never back out of the port it came in on (a leaf's core ports excepted). The outputs
// are randomly not ready. The harness works out the expected output port of each
// packet from its own picture of the topology and the routing preference: at a leaf,
// diagonal, then row tree, then column tree, and the core bit at the destination leaf;
// at a stem or root, up first, then the children. Each output must carry whole
// packets, never interleaved, with the flits in order, the hop count one higher than
// at the input, and each packet exactly once. A lone flit entering an idle router must
// leave in the next cycle. Output contention must occur at routers with three or more
// ports. Results are reported on `done`, `checks` and `failures`.
module tb_router_harness #(
  parameter int NODE = 5,
  parameter int NPKT = 200    // packets per input port
) (
  output bit done,
  output int checks,
  output int failures
);
  import d2d_pkg::*;
  import tb_topo_pkg::*;

  localparam int NP = num_ports(NODE);

  logic  clk = 0, rst_n = 0;
  logic  in_valid  [MAX_PORTS];
  logic  in_ready  [MAX_PORTS];
  flit_t in_flit   [MAX_PORTS];
  logic  out_valid [MAX_PORTS];
  logic  out_ready [MAX_PORTS];
  flit_t out_flit  [MAX_PORTS];

  d2d_router #(.NODE(NODE)) dut (.*);

  always #5 clk = ~clk;

  initial begin checks = 0; failures = 0; done = 0; end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL router %0d %0t: %s", NODE, $time, what); end
  endtask

  topo_t t;
  function automatic int expected_port(int dest_core);
    int dl;
    dl = dest_core / 2;
    if (dl == NODE) return dest_core % 2;
    if (NODE < 16) begin
      if (t.d[t.nbr[NODE][4]][dl] < t.d[NODE][dl]) return 4;
      if (t.d[t.nbr[NODE][2]][dl] < t.d[NODE][dl]) return 2;
      return 3;
    end
    if (t.nbr[NODE][2] >= 0 && t.d[t.nbr[NODE][2]][dl] < t.d[NODE][dl]) return 2;
    if (t.d[t.nbr[NODE][0]][dl] < t.d[NODE][dl]) return 0;
    return 1;
  endfunction

  // expected[o] holds the packet ids that must appear on output o, in any order
  int pkt_port [5][NPKT];
  int pkt_len  [5][NPKT];
  int seen     [5][NPKT];
  int cur_in [5], cur_seq [5], cur_w [5];
  bit in_pkt [5];
  int delivered = 0, contention = 0;

  always @(posedge clk) if (rst_n) begin
    int cnt [5];
    for (int o = 0; o < 5; o++) begin
      cnt[o] = 0;
      if (out_valid[o] && out_ready[o]) begin
        int ip, sq, w;
        ip = int'(out_flit[o].data[31:24]);
        sq = int'(out_flit[o].data[23:8]);
        w  = int'(out_flit[o].data[7:0]);
        check(ip < 5 && sq < NPKT, "flit id");
        if (ip < 5 && sq < NPKT) begin
          check(pkt_port[ip][sq] == o, $sformatf("packet %0d.%0d on port %0d, expected %0d", ip, sq, o, pkt_port[ip][sq]));
          check(out_flit[o].hops == HOP_W'(ip + 1), "hop count incremented");
          if (!in_pkt[o]) begin
            check(w == 0 && is_head(out_flit[o].kind), "packet starts with head");
            cur_in[o] = ip; cur_seq[o] = sq; cur_w[o] = 0; in_pkt[o] = 1;
          end else begin
            check(ip == cur_in[o] && sq == cur_seq[o] && w == cur_w[o] + 1, "no interleaving, in order");
            cur_w[o] = w;
          end
          if (is_tail(out_flit[o].kind)) begin
            check(w == pkt_len[ip][sq] - 1, "tail is last flit");
            seen[ip][sq]++;
            in_pkt[o] = 0;
            delivered++;
          end
        end
      end
      out_ready[o] <= ($urandom_range(3, 0) != 0);
    end
    for (int i = 0; i < NP; i++)
      if (dut.f_valid[i] && is_head(dut.f_flit[i].kind)) cnt[dut.want[i]]++;
    for (int o = 0; o < 5; o++) if (cnt[o] > 1) contention++;
  end

  for (genvar i = 0; i < MAX_PORTS; i++) begin : g_src
    initial begin
      int dc, ep, len;
      in_valid[i] = 0;
      in_flit[i]  = '0;
      wait (rst_n);
      @(negedge clk);
      if (i >= NP) wait (0);
      wait (i == 0 || $time > 200);
      for (int s = 0; s < NPKT; s++) begin
        do begin
          dc = $urandom_range(31, 0);
          ep = expected_port(dc);
        end while (ep == i && (i >= 2 || NODE >= 16));
        len = $urandom_range(4, 1);
        pkt_port[i][s] = ep;
        pkt_len[i][s]  = len;
        for (int w = 0; w < len; w++) begin
          in_valid[i]     = 1;
          in_flit[i].kind = (len == 1) ? FLIT_SINGLE : (w == 0) ? FLIT_HEAD : (w == len - 1) ? FLIT_TAIL : FLIT_BODY;
          in_flit[i].dest = core_addr_t'(dc);
          in_flit[i].src  = core_addr_t'(i);
          in_flit[i].hops = HOP_W'(i);
          in_flit[i].data = {8'(i), 16'(s), 8'(w)};
          while (!in_ready[i]) @(negedge clk);
          @(negedge clk);
          in_valid[i] = 0;
          if ($urandom_range(3, 0) == 0) @(negedge clk);
        end
      end
    end
  end

  initial begin
    int waited;
    for (int o = 0; o < 5; o++) out_ready[o] = 1;
    t = build();
    for (int i = 0; i < 5; i++) for (int s = 0; s < NPKT; s++) begin seen[i][s] = 0; pkt_port[i][s] = -1; end
    for (int o = 0; o < 5; o++) in_pkt[o] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the first flit from port 0 enters at the next edge; it must leave right after it
    @(negedge clk);   // input 0 has put its first flit on in_flit[0]
    @(negedge clk);
    check(out_valid[pkt_port[0][0]] && out_flit[pkt_port[0][0]].data == {8'd0, 16'd0, 8'd0},
          "one-cycle router latency");
    waited = 0;
    while (delivered < NP * NPKT && waited < 50000) begin @(negedge clk); waited++; end
    for (int i = 0; i < NP; i++)
      for (int s = 0; s < NPKT; s++) check(seen[i][s] == 1, $sformatf("packet %0d.%0d delivered once", i, s));
    for (int o = NP; o < MAX_PORTS; o++) check(!out_valid[o] && !in_ready[o], "unused port idle");
    if (NP >= 3) check(contention > 0, "output contention seen");
    $display("router %0d: delivered=%0d contention=%0d", NODE, delivered, contention);
    done = 1;
  end

endmodule
