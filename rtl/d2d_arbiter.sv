// d2d_arbiter -- round-robin arbiter for one router output port.
//
// N requesters, one-hot grant. The search for a requester starts at the position after
// the last granted one, so every waiting input is served within N grants. The grant is
// combinational in `req`. The priority pointer moves only when `advance` is high, that
// is, when the router has actually sent a packet through the output in that cycle. The
// router pulses `advance` once per packet, on its head flit. While an output is held
// for a packet, the router ignores this arbiter.
//
// The paper shows an arbitration stage inside the switch, but not how it works.
// Round-robin is this design's choice.
module d2d_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);

  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;

  logic [IDX_W-1:0] last_q;   // index granted last

  always_comb begin
    logic [IDX_W-1:0] idx;
    grant = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = IDX_W'((int'(last_q) + k) % N);
      if (req[idx] && grant == '0) grant[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q <= IDX_W'(N - 1);
    end else if (advance && grant != '0) begin
      for (int unsigned i = 0; i < N; i++)
        if (grant[i]) last_q <= IDX_W'(i);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_granted_requests: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~req) == '0);

endmodule
