// d2d_pkg -- shared types, constants and topology of the 4x4 D2D-MoT network.
//
// The network joins a 4x4 mesh of trees with two kinds of shortcut link. Sixteen
// leaf routers L(r,c) sit on a 4x4 grid; each leaf carries two IP cores. Each row r
// has a binary tree (two row stems, one row root) over its four leaves, and each
// column c has the same (two column stems, one column root). The leaves are shared by
// the row and column trees. The grid splits into four 2x2 modules. In each module, a
// leaf is linked to the leaf diagonally opposite it, which adds 8 links. The four
// "internal" roots are those of rows 1 and 2 and of columns 1 and 2. They are joined in
// opposite pairs (row 1 with row 2, column 1 with column 2), which adds 2 links. That
// gives 40 routers and 58 bidirectional links. The degree is 5 for a leaf (2 cores,
// row stem, column stem, diagonal), 3 for a stem, 3 for an internal root and 2 for an
// external root. All of this follows the paper's figure and table.
//
// Node numbering (this design's choice):
//   0..15   leaf L(r,c)         = 4*r + c
//   16..23  row stem RS(r,h)    = 16 + 2*r + h   joins L(r,2h) and L(r,2h+1)
//   24..31  column stem CS(c,h) = 24 + 2*c + h   joins L(2h,c) and L(2h+1,c)
//   32..35  row root RR(r)      = 32 + r
//   36..39  column root CR(c)   = 36 + c
// Port numbering:
//   leaf : 0 core 0, 1 core 1, 2 row stem, 3 column stem, 4 diagonal leaf
//   stem : 0 lower child leaf, 1 upper child leaf, 2 root
//   root : 0 stem h=0, 1 stem h=1, 2 opposite internal root (internal roots only)
//
// Core address: {row, col, core}, 5 bits. The row and column select the leaf and the
// core bit selects which of its two cores. This is the "core ID field" of the paper's
// routing algorithm. The paper omits its own addressing scheme, so this encoding is
// this design's choice.
//
// The routing functions below are constant functions, evaluated at elaboration to
// fill each router's look-up table. route_port() returns the output port of a
// shortest path. Ties are broken in the paper's order of preference: diagonal or
// diametrical channel first, then the row tree, then the column tree.
package d2d_pkg;

  localparam int unsigned NUM_ROWS   = 4;
  localparam int unsigned NUM_COLS   = 4;
  localparam int unsigned NUM_LEAVES = NUM_ROWS * NUM_COLS;    // 16
  localparam int unsigned NUM_NODES  = 3 * NUM_LEAVES - 8;     // 40
  localparam int unsigned NUM_CORES  = 2 * NUM_LEAVES;         // 32
  localparam int unsigned NUM_LINKS  = 58;
  localparam int unsigned MAX_PORTS  = 5;
  localparam int unsigned PORT_W     = 3;
  localparam int unsigned DATA_W     = 32;
  localparam int unsigned HOP_W      = 4;

  localparam int unsigned FIRST_RSTEM = 16;
  localparam int unsigned FIRST_CSTEM = 24;
  localparam int unsigned FIRST_RROOT = 32;
  localparam int unsigned FIRST_CROOT = 36;

  typedef struct packed {
    logic [1:0] row;
    logic [1:0] col;
    logic       core;
  } core_addr_t;

  typedef enum logic [1:0] {
    FLIT_HEAD   = 2'd0,
    FLIT_BODY   = 2'd1,
    FLIT_TAIL   = 2'd2,
    FLIT_SINGLE = 2'd3
  } flit_kind_e;

  // Every flit carries the packet header fields. Routers route on the head flit only.
  // The hop count is incremented by every router the flit leaves.
  typedef struct packed {
    flit_kind_e        kind;
    core_addr_t        dest;
    core_addr_t        src;
    logic [HOP_W-1:0]  hops;
    logic [DATA_W-1:0] data;
  } flit_t;

  typedef enum logic [1:0] {
    NODE_LEAF     = 2'd0,
    NODE_STEM     = 2'd1,
    NODE_ROOT_EXT = 2'd2,
    NODE_ROOT_INT = 2'd3
  } node_kind_e;

  function automatic logic is_tail(flit_kind_e k);
    return (k == FLIT_TAIL) || (k == FLIT_SINGLE);
  endfunction

  function automatic logic is_head(flit_kind_e k);
    return (k == FLIT_HEAD) || (k == FLIT_SINGLE);
  endfunction

  function automatic node_kind_e node_kind(int n);
    if (n < FIRST_RSTEM) return NODE_LEAF;
    if (n < FIRST_RROOT) return NODE_STEM;
    if (n == 33 || n == 34 || n == 37 || n == 38) return NODE_ROOT_INT;
    return NODE_ROOT_EXT;
  endfunction

  function automatic int num_ports(int n);
    case (node_kind(n))
      NODE_LEAF:     return 5;
      NODE_ROOT_EXT: return 2;
      default:       return 3;
    endcase
  endfunction

  // Neighbour router reached through port p of node n, or -1 (core port / no port).
  function automatic int peer_node(int n, int p);
    int r, c, h;
    if (p >= num_ports(n)) return -1;
    if (n < FIRST_RSTEM) begin
      r = n / 4; c = n % 4;
      case (p)
        2:       return FIRST_RSTEM + 2 * r + c / 2;
        3:       return FIRST_CSTEM + 2 * c + r / 2;
        4:       return 4 * (r ^ 1) + (c ^ 1);
        default: return -1;
      endcase
    end else if (n < FIRST_CSTEM) begin
      r = (n - FIRST_RSTEM) / 2; h = (n - FIRST_RSTEM) % 2;
      if (p == 2) return FIRST_RROOT + r;
      return 4 * r + 2 * h + p;
    end else if (n < FIRST_RROOT) begin
      c = (n - FIRST_CSTEM) / 2; h = (n - FIRST_CSTEM) % 2;
      if (p == 2) return FIRST_CROOT + c;
      return 4 * (2 * h + p) + c;
    end else if (n < FIRST_CROOT) begin
      r = n - FIRST_RROOT;
      if (p == 2) return FIRST_RROOT + (3 - r);
      return FIRST_RSTEM + 2 * r + p;
    end else begin
      c = n - FIRST_CROOT;
      if (p == 2) return FIRST_CROOT + (3 - c);
      return FIRST_CSTEM + 2 * c + p;
    end
  endfunction

  // Port of peer_node(n,p) that leads back to n.
  function automatic int peer_port(int n, int p);
    int m;
    m = peer_node(n, p);
    if (m < 0) return -1;
    for (int q = 0; q < MAX_PORTS; q++)
      if (peer_node(m, q) == n) return q;
    return -1;
  endfunction

  // Hop count between routers a and b (breadth-first search over the 40 routers).
  function automatic int hop_distance(int a, int b);
    int hopd [NUM_NODES];
    int queue [NUM_NODES];
    int head, tail, u, v;
    for (int i = 0; i < NUM_NODES; i++) hopd[i] = -1;
    head = 0; tail = 0;
    hopd[a] = 0; queue[tail] = a; tail++;
    while (head < tail) begin
      u = queue[head]; head++;
      if (u == b) return hopd[u];
      for (int p = 0; p < MAX_PORTS; p++) begin
        v = peer_node(u, p);
        if (v >= 0 && hopd[v] < 0) begin
          hopd[v] = hopd[u] + 1;
          queue[tail] = v; tail++;
        end
      end
    end
    return -1;
  endfunction

  // Output port at router n for a packet bound to leaf d (cores excluded: at the
  // destination leaf the core bit picks port 0 or 1). Preference among ports that lie
  // on a shortest path: diagonal/diametrical (leaf 4, root 2), row tree, column tree,
  // then the children of a stem or root.
  function automatic int route_port(int n, int d);
    int order [MAX_PORTS];
    int here, m, p;
    if (n == d) return 0;
    here = hop_distance(n, d);
    if (n < FIRST_RSTEM) begin
      order = '{4, 2, 3, 0, 1};
    end else begin
      order = '{2, 0, 1, 3, 4};
    end
    for (int i = 0; i < MAX_PORTS; i++) begin
      p = order[i];
      m = peer_node(n, p);
      if (m >= 0 && hop_distance(m, d) == here - 1) return p;
    end
    return 0;
  endfunction

  // Look-up table of router n: entry d (leaf index) is the output port for leaf d.
  function automatic logic [NUM_LEAVES*PORT_W-1:0] build_lut(int n);
    logic [NUM_LEAVES*PORT_W-1:0] lut;
    lut = '0;
    for (int d = 0; d < NUM_LEAVES; d++)
      lut[d*PORT_W +: PORT_W] = PORT_W'(route_port(n, d));
    return lut;
  endfunction

endpackage
