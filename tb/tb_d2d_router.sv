// tb_d2d_router -- the router in each of its four forms, under random traffic.
//
// Four tb_router_harness instances, each with its own clock and router: leaf L(1,1)
// (5 ports), row stem RS(1,0) (3 ports), internal row root RR1 (3 ports, with the
// diametrical link) and external row root RR0 (2 ports). Each harness checks routing,
// wormhole integrity, ordering, hop counts, one-cycle latency and contention. This
// bench adds up their results.
module tb_d2d_router;

  bit done [4];
  int chk  [4];
  int fail [4];

  tb_router_harness #(.NODE(5))  h_leaf (.done(done[0]), .checks(chk[0]), .failures(fail[0]));
  tb_router_harness #(.NODE(18)) h_stem (.done(done[1]), .checks(chk[1]), .failures(fail[1]));
  tb_router_harness #(.NODE(33)) h_iroot(.done(done[2]), .checks(chk[2]), .failures(fail[2]));
  tb_router_harness #(.NODE(32)) h_eroot(.done(done[3]), .checks(chk[3]), .failures(fail[3]));

  initial begin
    int checks, failures;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks = chk[0] + chk[1] + chk[2] + chk[3];
    failures = fail[0] + fail[1] + fail[2] + fail[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2] + chk[3],
             fail[0] + fail[1] + fail[2] + fail[3] + 1);
    $finish;
  end

endmodule
