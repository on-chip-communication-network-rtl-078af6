// wihet_pkg -- types, sizes and floorplan of the wireless-enabled heterogeneous NoC.
//
// The chip is an 8 x 8 grid of tiles: 56 GPU tiles, 4 CPU tiles and 4 memory-controller
// (MC) tiles, one router per tile. The CPUs sit in the four centre tiles and each MC sits
// near the centre of one quadrant, as the placement the design adopts for its hybrid NoC.
// Five non-overlapping wireless channels overlay the wireline links: channel 0 is
// dedicated to CPU<->MC traffic (a wireless interface, WI, on every CPU and MC tile) and
// channels 1..4 carry GPU<->MC traffic with six WIs each, 24 in all.
//
// Tile numbering: tile = y*MESH_X + x, x growing to the east, y growing to the south.
// Router port numbering is fixed for every tile: 0 local, 1 north, 2 east, 3 south,
// 4 west, 5 wireless.
//
// Taken from the design: grid size, tile counts, CPU-at-centre / MC-per-quadrant layout,
// 5 channels, 16 Gb/s per channel, 2.5 GHz NoC clock, 24 GPU-MC WIs (6 per channel).
// Own choices: the flit format (one-flit packets), the exact tiles that hold the
// GPU-MC WIs, and the use of mesh neighbour links as the wireline connectivity.
package wihet_pkg;

  localparam int MESH_X   = 8;
  localparam int MESH_Y   = 8;
  localparam int N_TILES  = MESH_X * MESH_Y;
  localparam int TILE_W   = $clog2(N_TILES);
  localparam int PAYLOAD_W = 32;

  localparam int N_CHANNELS   = 5;   // wireless channels at 30/60/90/140/200 GHz
  localparam int NOC_CLK_MHZ  = 2500;
  localparam int CHAN_MBPS    = 16000;

  // Router port indices
  localparam int P_LOCAL = 0;
  localparam int P_N     = 1;
  localparam int P_E     = 2;
  localparam int P_S     = 3;
  localparam int P_W     = 4;
  localparam int P_WL    = 5;
  localparam int N_PORTS = 6;
  localparam int PORT_W  = $clog2(N_PORTS);

  typedef logic [TILE_W-1:0] tile_t;

  typedef enum logic [1:0] {
    CLS_CPU_REQ   = 2'd0,  // CPU -> MC
    CLS_CPU_REPLY = 2'd1,  // MC -> CPU
    CLS_GPU_REQ   = 2'd2,  // GPU -> MC
    CLS_GPU_REPLY = 2'd3   // MC -> GPU
  } msg_class_e;

  // One flit carries a whole message (single-flit packets).
  typedef struct packed {
    tile_t                dst;
    tile_t                src;
    msg_class_e           cls;
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  localparam int FLIT_W = $bits(flit_t);

  // What travels over a wireless channel: the flit plus the tile of the receiving WI.
  typedef struct packed {
    tile_t tgt;
    flit_t flit;
  } wl_frame_t;

  localparam int FRAME_W = $bits(wl_frame_t);

  // Cycles of the 2.5 GHz NoC clock needed to send one frame at 16 Gb/s.
  localparam int TX_CYCLES = (FRAME_W * NOC_CLK_MHZ + CHAN_MBPS - 1) / CHAN_MBPS;

  typedef enum logic [1:0] {
    T_GPU = 2'd0,
    T_CPU = 2'd1,
    T_MC  = 2'd2
  } tile_kind_e;

  function automatic int tile_x(input int t);
    return t % MESH_X;
  endfunction

  function automatic int tile_y(input int t);
    return t / MESH_X;
  endfunction

  function automatic int manhattan(input int a, input int b);
    int dx, dy;
    dx = tile_x(a) - tile_x(b);
    dy = tile_y(a) - tile_y(b);
    if (dx < 0) dx = -dx;
    if (dy < 0) dy = -dy;
    return dx + dy;
  endfunction

  // CPUs in the four centre tiles; one MC near the centre of each quadrant.
  function automatic tile_kind_e kind_of(input int t);
    case (t)
      27, 28, 35, 36: return T_CPU;
      18, 21, 42, 45: return T_MC;
      default:        return T_GPU;
    endcase
  endfunction

  // Wireless channel of the WI on tile t, or -1 when the tile has none.
  function automatic int wi_channel(input int t);
    case (t)
      27, 28, 35, 36, 18, 21, 42, 45: return 0;
      17, 7, 31, 58, 61, 63:          return 1;  // near MC 18
      22, 0, 24, 57, 60, 56:          return 2;  // near MC 21
      41, 6, 15, 39, 3, 47:           return 3;  // near MC 42
      46, 1, 8, 32, 4, 40:            return 4;  // near MC 45
      default:                        return -1;
    endcase
  endfunction

  // Request slot of the WI on tile t: its rank, by tile number, among the WIs of its channel.
  function automatic int wi_slot(input int t);
    int s;
    s = 0;
    for (int u = 0; u < t; u++)
      if (wi_channel(u) == wi_channel(t)) s++;
    return s;
  endfunction

  function automatic int wi_count(input int ch);
    int n;
    n = 0;
    for (int u = 0; u < N_TILES; u++)
      if (wi_channel(u) == ch) n++;
    return n;
  endfunction

  // Tile of the WI in slot s of channel ch (-1 if none).
  function automatic int wi_tile(input int ch, input int s);
    for (int u = 0; u < N_TILES; u++)
      if (wi_channel(u) == ch && wi_slot(u) == s) return u;
    return -1;
  endfunction

  // Inter-tile ports of a router: its wireline neighbours plus its wireless port.
  function automatic int inter_tile_ports(input int t);
    int n;
    n = 0;
    if (tile_y(t) > 0)          n++;
    if (tile_x(t) < MESH_X - 1) n++;
    if (tile_y(t) < MESH_Y - 1) n++;
    if (tile_x(t) > 0)          n++;
    if (wi_channel(t) >= 0)     n++;
    return n;
  endfunction

endpackage
