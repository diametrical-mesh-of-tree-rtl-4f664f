// tb_d2d_fifo -- random push/pop test of the flit buffer against a queue model.
//
// DEPTH 4. Each cycle the bench offers a write and a read at random. It checks
// wr_ready (not full), rd_valid (not empty) and rd_data (oldest entry) against the
// model. A full FIFO must refuse a write even when it is read in the same cycle. A flit
// written at edge t must be readable right after that edge.
module tb_d2d_fifo;
  import d2d_pkg::*;

  localparam int DEPTH = 4;

  logic  clk = 0, rst_n = 0;
  logic  wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  flit_t wr_data, rd_data;

  d2d_fifo #(.T(flit_t), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  flit_t model [$];
  int n_full_both = 0, n_wr = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    bit dw, dr;
    wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(wr_ready == (model.size() < DEPTH), "wr_ready");
      check(rd_valid == (model.size() > 0), "rd_valid");
      if (model.size() > 0) check(rd_data == model[0], "rd_data is oldest");
      wr_valid = ($urandom_range(99, 0) < ((i / 500) % 2 ? 80 : 40));
      rd_ready = ($urandom_range(99, 0) < ((i / 500) % 2 ? 40 : 80));
      wr_data  = '0;
      wr_data.data = $urandom;
      wr_data.kind = flit_kind_e'($urandom_range(3, 0));
      @(posedge clk);
      dw = wr_valid && wr_ready;
      dr = rd_valid && rd_ready;
      if (wr_valid && rd_ready && model.size() == DEPTH) begin n_full_both++; check(!dw && dr, "full: read taken, write refused"); end
      if (dr) void'(model.pop_front());
      if (dw) begin model.push_back(wr_data); n_wr++; end
    end
    check(n_full_both > 0, "write offered to a full FIFO that is read");
    $display("writes=%0d full-and-both=%0d", n_wr, n_full_both);
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
