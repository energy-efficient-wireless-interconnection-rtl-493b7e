// Shared types, constants and routing functions for the wireless multichip
// interconnect (four 16-core chips and four in-package DRAM stacks, "4C4M").
//
// Node numbering: core tile n (0..63) sits on chip n/16 at mesh row
// (n%16)/4 and column n%4; node 64+m is the base logic die of memory stack m.
// Every chip has one wireless interface (WI) at mesh position (WI_X, WI_Y),
// every memory stack has one on its base die.  WI w (0..3) belongs to chip w,
// WI 4+m to memory stack m; the WI number is also the MAC transmit order.
//
// Routing uses shortest paths in the system graph (mesh links plus one
// wireless hop between every pair of WIs), precomputed per destination and
// stored in every switch as a forwarding table.  Ties are broken towards the X
// direction first, so mesh segments are dimension-ordered and every route has
// at most one wireless hop; as a packet that arrived over the air is always
// delivered inside the receiving chip, channel dependencies cannot form a
// cycle and the routes are deadlock-free.  The table contents are computed at
// elaboration by the constant functions below and stored per switch as a
// forwarding table.  The numbers of chips, cores, VCs, buffer depth, flit and
// packet size and the 16 Gb/s wireless rate at a 2.5 GHz clock follow the
// paper; the numbering, the tie-breaking order and the flit field layout are choices of this
// design.
package mcw_pkg;

  // ---------------- system size (paper: 4C4M, 4x4 cores per chip) -------------
  localparam int NUM_CHIPS      = 4;
  localparam int MESH_X         = 4;
  localparam int MESH_Y         = 4;
  localparam int CORES_PER_CHIP = MESH_X * MESH_Y;
  localparam int NUM_CORES      = NUM_CHIPS * CORES_PER_CHIP;
  localparam int NUM_MEM        = 4;
  localparam int NUM_NODES      = NUM_CORES + NUM_MEM;
  localparam int NUM_WI         = NUM_CHIPS + NUM_MEM;
  // WI tile inside each chip: one of the four central switches of the 4x4 mesh
  localparam int WI_X           = 1;
  localparam int WI_Y           = 1;

  // ---------------- switch / flit parameters (paper, Sec. IV) ----------------
  localparam int NUM_VC     = 8;    // VCs per port
  localparam int BUF_DEPTH  = 16;   // flits per VC buffer
  localparam int FLIT_W     = 32;   // flit payload bits
  localparam int PKT_FLITS  = 64;   // flits per packet
  // wireless: 16 Gb/s against a 2.5 GHz clock = 6.4 bit/cycle, so one 32-bit
  // flit occupies ceil(32/6.4) = 5 clock cycles (one "slot") on the channel
  localparam int FLIT_CYCLES = 5;

  localparam int NODE_W = $clog2(NUM_NODES);
  localparam int WI_W   = $clog2(NUM_WI);
  localparam int VC_W   = $clog2(NUM_VC);
  localparam int CNT_W  = $clog2(BUF_DEPTH + 1);
  localparam int PKTID_W = WI_W + VC_W;   // PktID = {source WI, source tx VC}

  // ---------------- switch ports ----------------
  localparam int NPORTS  = 6;
  localparam int PORT_W  = 3;
  localparam int P_LOCAL = 0;
  localparam int P_N     = 1;   // row - 1
  localparam int P_E     = 2;   // column + 1
  localparam int P_S     = 3;   // row + 1
  localparam int P_W     = 4;   // column - 1
  localparam int P_WI    = 5;   // wireless port (WI switches only)

  typedef enum logic [1:0] {
    FT_BODY = 2'd0,
    FT_HEAD = 2'd1,
    FT_TAIL = 2'd2,
    FT_CTRL = 2'd3     // MAC control word, only on the wireless channel
  } ftype_e;

  typedef struct packed {
    ftype_e            ftype;
    logic [FLIT_W-1:0] data;   // head flit: [31:25] destination, [24:18] source
  } flit_t;

  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  // one word on the shared wireless medium
  typedef struct packed {
    logic  valid;
    flit_t word;
  } air_t;

  // forwarding table entry: output port and, for the wireless port, the WI
  // that is the next hop
  typedef struct packed {
    logic [PORT_W-1:0] port;
    logic [WI_W-1:0]   wi;
  } route_t;

  function automatic logic [NODE_W-1:0] head_dest(flit_t f);
    return f.data[FLIT_W-1 -: NODE_W];
  endfunction

  function automatic logic [NODE_W-1:0] head_src(flit_t f);
    return f.data[FLIT_W-1-NODE_W -: NODE_W];
  endfunction

  // ---------------- topology helpers ----------------
  function automatic int wi_node(int w);
    if (w < NUM_CHIPS) return w * CORES_PER_CHIP + WI_Y * MESH_X + WI_X;
    return NUM_CORES + (w - NUM_CHIPS);
  endfunction

  function automatic int wi_of_node(int n);   // -1 if node has no WI
    for (int w = 0; w < NUM_WI; w++) if (wi_node(w) == n) return w;
    return -1;
  endfunction

  // mesh neighbour of node n through port p, -1 if none
  function automatic int mesh_nb(int n, int p);
    int x, y;
    if (n >= NUM_CORES) return -1;
    y = (n % CORES_PER_CHIP) / MESH_X;
    x = n % MESH_X;
    case (p)
      P_N: if (y > 0)          return n - MESH_X;
      P_S: if (y < MESH_Y - 1) return n + MESH_X;
      P_E: if (x < MESH_X - 1) return n + 1;
      P_W: if (x > 0)          return n - 1;
      default: ;
    endcase
    return -1;
  endfunction

  // system node that carries the WI serving node n (a chip's WI tile, or the
  // memory node itself)
  function automatic int home_wi_node(int n);
    if (n >= NUM_CORES) return n;
    return (n / CORES_PER_CHIP) * CORES_PER_CHIP + WI_Y * MESH_X + WI_X;
  endfunction

  function automatic int mesh_dist(int a, int b);   // same chip only
    int dx, dy;
    if (a >= NUM_CORES || b >= NUM_CORES) return 0;
    dx = (a % MESH_X) - (b % MESH_X);
    dy = ((a % CORES_PER_CHIP) / MESH_X) - ((b % CORES_PER_CHIP) / MESH_X);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  function automatic bit same_chip(int a, int b);
    if (a >= NUM_CORES || b >= NUM_CORES) return a == b;
    return a / CORES_PER_CHIP == b / CORES_PER_CHIP;
  endfunction

  // hop count of the shortest path from a to b in the system graph (mesh
  // links plus a direct wireless link between every two WIs).  This is what
  // Dijkstra's algorithm with unit link weights returns for this graph: inside
  // a chip the mesh distance; between chips the way to the local WI, one
  // wireless hop, and the way from the remote WI.
  function automatic int sys_dist(int a, int b);
    if (same_chip(a, b)) return mesh_dist(a, b);
    return mesh_dist(a, home_wi_node(a)) + 1 + mesh_dist(home_wi_node(b), b);
  endfunction

  // forwarding table entry of switch `self` for destination `d`: the first
  // neighbour, in the order E, W, N, S, wireless, that is one hop closer to d.
  // Preferring the X direction makes every mesh segment dimension-ordered.
  function automatic route_t route_entry(int self, int d);
    route_t r;
    int nb;
    bit found;
    r.port = PORT_W'(P_LOCAL); r.wi = '0; found = 0;
    if (d == self) return r;
    for (int k = 0; k < 4; k++) begin
      int p;
      p = (k == 0) ? P_E : (k == 1) ? P_W : (k == 2) ? P_N : P_S;
      nb = mesh_nb(self, p);
      if (!found && nb >= 0 && sys_dist(nb, d) == sys_dist(self, d) - 1) begin
        r.port = PORT_W'(p); found = 1;
      end
    end
    if (!found && wi_of_node(self) >= 0)
      for (int w = 0; w < NUM_WI; w++) begin
        nb = wi_node(w);
        if (!found && nb != self && sys_dist(nb, d) == sys_dist(self, d) - 1) begin
          r.port = PORT_W'(P_WI); r.wi = WI_W'(w); found = 1;
        end
      end
    return r;
  endfunction

endpackage
