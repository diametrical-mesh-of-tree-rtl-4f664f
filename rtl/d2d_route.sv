// d2d_route -- routing unit of one D2D-MoT router.
//
// This unit takes the destination core address of a head flit and returns the output
// port of the router. It is a 16-entry look-up table indexed by the destination leaf
// {row, col}. The contents are computed at elaboration, for the router given by NODE,
// by d2d_pkg::build_lut. Every entry lies on a shortest path through the 40-router
// topology. Among equally short paths the choice is, in order: the diagonal or
// diametrical channel, the row tree, the column tree. At the destination leaf itself,
// the core bit of the address selects core port 0 or 1 ("route to core 1 / core 2").
// The unit is purely combinational.
//
// The paper's routing algorithm (route via the row tree when source and sink share a
// row, via the column tree when they share a column, otherwise via the diametrical
// channel, and at the end by core ID) is written in prose. It promises shortest-path,
// deterministic routing, and the paper speaks of a look-up table that gives a packet's
// path. The table, its shortest-path contents and the tie-break order are this
// design's reading of that.
module d2d_route
  import d2d_pkg::*;
#(
  parameter int unsigned NODE = 0
) (
  input  core_addr_t          dest,
  output logic [PORT_W-1:0]   out_port
);

  localparam logic [NUM_LEAVES*PORT_W-1:0] LUT = build_lut(int'(NODE));

  logic [3:0] leaf;

  assign leaf = {dest.row, dest.col};

  always_comb begin
    if (NODE < NUM_LEAVES && leaf == 4'(NODE))
      out_port = PORT_W'(dest.core);
    else
      out_port = LUT[leaf*PORT_W +: PORT_W];
  end

endmodule
