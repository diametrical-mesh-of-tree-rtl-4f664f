// d2d_fifo -- flit buffer used at every router input port and in every link stage.
//
// A synchronous FIFO of DEPTH entries of type T, held in a register array with a
// read pointer, a write pointer and an occupancy count. The head entry is always on
// `rd_data` when `rd_valid` is high (first-word fall-through). A write is accepted
// when `wr_valid && wr_ready`, and a read when `rd_valid && rd_ready`. Both may happen
// in the same cycle. `wr_ready` depends only on the stored count ("not full"), so no
// combinational path runs from `rd_ready` to `wr_ready`. As a result, a full FIFO
// refuses a write even in a cycle in which it is read. A flit written at edge t can be
// read right after that edge.
//
// The paper names buffers as a part of the switch and of the link. It gives no depth
// or organisation for them. The depth of 4 flits, one packet of the default length,
// is this design's choice.
module d2d_fifo #(
  parameter type         T     = d2d_pkg::flit_t,
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_valid,
  output logic wr_ready,
  input  T     wr_data,
  output logic rd_valid,
  input  logic rd_ready,
  output T     rd_data
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  T                   mem [DEPTH];
  logic [PTR_W-1:0]   rd_ptr, wr_ptr;
  logic [CNT_W-1:0]   count;
  logic               do_wr, do_rd;

  assign wr_ready = (count != CNT_W'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [PTR_W-1:0] next_ptr(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  // The count never leaves 0..DEPTH.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) count <= CNT_W'(DEPTH));

endmodule
