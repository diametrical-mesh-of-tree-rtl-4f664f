// tb_d2d_arbiter -- round-robin arbiter against a reference model.
//
// N = 5, the port count of a leaf router. Random requests and random `advance`. The
// grant must be the first requester after the last advanced grant, in circular order.
// With all five inputs requesting and advance every cycle, the grants must rotate
// through 0,1,2,3,4 in turn.
module tb_d2d_arbiter;

  localparam int N = 5;

  logic         clk = 0, rst_n = 0;
  logic [N-1:0] req = '0;
  logic         advance = 0;
  logic [N-1:0] grant;

  d2d_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int last = N - 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask

  function automatic logic [N-1:0] expect_grant(logic [N-1:0] r, int l);
    for (int k = 1; k <= N; k++)
      if (r[(l + k) % N]) return N'(1) << ((l + k) % N);
    return '0;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (i < 2000) begin
        req     = N'($urandom);
        advance = $urandom_range(1, 0);
      end else begin
        req     = '1;
        advance = 1;
      end
      #1;
      check(grant == expect_grant(req, last), $sformatf("grant %b for req %b last %0d", grant, req, last));
      if (i >= 2000) check(grant == (N'(1) << ((last + 1) % N)), "rotation under full load");
      @(posedge clk);
      if (advance && grant != '0)
        for (int k = 0; k < N; k++) if (grant[k]) last = k;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
