// tb_d2d_link -- ordering, throughput and latency of the pipelined link.
//
// Default link (one stage of two flits). Random valid at the input and random ready at
// the output: flits must leave in the order they entered, none lost or duplicated.
// With both ends always ready, one flit per cycle must pass, and a flit must appear at
// the output right after the edge that took it in (one cycle of latency).
module tb_d2d_link;
  import d2d_pkg::*;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_ready, out_valid, out_ready = 0;
  flit_t in_flit, out_flit;

  d2d_link dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  flit_t model [$];
  int sent = 0, got = 0, got_full = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    in_flit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random phase
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(1, 0);
      out_ready = ($urandom_range(3, 0) != 0);
      in_flit = '0;
      in_flit.data = sent;
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(model.size() > 0 && out_flit == model[0], "order");
        if (model.size() > 0) void'(model.pop_front());
        got++;
      end
      if (in_valid && in_ready) begin model.push_back(in_flit); sent++; end
    end
    // drain
    @(negedge clk); in_valid = 0; out_ready = 1;
    while (model.size() > 0) begin
      @(posedge clk);
      if (out_valid) begin check(out_flit == model[0], "drain order"); void'(model.pop_front()); end
      @(negedge clk);
    end
    // streaming: one flit per cycle, one cycle latency
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      in_valid = 1; in_flit = '0; in_flit.data = 1000 + i;
      check(in_ready, "ready while streaming");
      if (i > 0) begin
        check(out_valid && out_flit.data == 32'(1000 + i - 1), "one-cycle latency");
        got_full++;
      end
    end
    @(negedge clk); in_valid = 0;
    check(got_full == 49, "full throughput");
    $display("sent=%0d", sent);
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
