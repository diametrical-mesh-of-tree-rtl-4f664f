// d2d_link -- pipelined point-to-point channel between two D2D-MoT routers.
//
// A link carries flits in one direction, from a sender's output port to a receiver's
// input buffer. It has STAGES buffered stages in a chain. Each stage is a d2d_fifo of
// STAGE_DEPTH flits, so each stage is a full register stage for the flits and also for
// the ready signal. A long wire can therefore be cut into pieces without a
// combinational path over its full length. With the defaults (one stage of two flits)
// a flit that enters at edge t can leave at the next edge, and the link moves one flit
// per cycle in steady state. Handshake: valid/ready on both ends.
//
// The paper's figure of the link shows a sender buffer, a receiver buffer and
// intermediate stages between them. The number and depth of the stages are this
// design's choice. Every router-to-router link of the network, the ten diagonal and
// diametrical links included, uses the same link.
module d2d_link
  import d2d_pkg::*;
#(
  parameter int unsigned STAGES      = 1,
  parameter int unsigned STAGE_DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);

  logic  v [STAGES+1];
  logic  r [STAGES+1];
  flit_t f [STAGES+1];

  assign v[0]      = in_valid;
  assign in_ready  = r[0];
  assign f[0]      = in_flit;
  assign out_valid = v[STAGES];
  assign r[STAGES] = out_ready;
  assign out_flit  = f[STAGES];

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    d2d_fifo #(.T(flit_t), .DEPTH(STAGE_DEPTH)) u_stage (
      .clk, .rst_n,
      .wr_valid (v[s]),
      .wr_ready (r[s]),
      .wr_data  (f[s]),
      .rd_valid (v[s+1]),
      .rd_ready (r[s+1]),
      .rd_data  (f[s+1])
    );
  end

endmodule
