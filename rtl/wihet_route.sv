// wihet_route -- routing function of one router (combinational).
//
// Chooses the output port for the flit at the head of an input buffer. The wireline
// route is dimension-ordered (X first, then Y) over the grid links. A router that owns a
// wireless interface looks, among the other WIs of its channel, for the one from which
// the destination is nearest; if one wireless hop plus the wireline distance from that
// WI is strictly shorter than the wireline-only distance, the wireless path is enabled
// and the flit is sent to the wireless port, tagged with the receiving WI's tile. If the
// wireless port cannot take the flit (wl_ok low: its transmit queue is full because the
// channel is held by others), the flit is re-routed over the wireline path instead.
//
// Every hop strictly reduces the grid distance to the destination, so no flit loops.
// The "use wireless only when shorter" rule and the wireline fallback follow the design;
// the XY wireline function and the one-hop look-ahead are this implementation's
// stand-in for the table-driven layered shortest-path routing, whose tables are not
// published. The wireless choice is a 64-entry table per router, filled at elaboration
// from the floorplan in wihet_pkg, so the hardware is a table lookup plus XY logic.
//
// Interface: dst in, wl_ok in; port (0 local, 1 N, 2 E, 3 S, 4 W, 5 wireless), wl_tgt
// (tile of the receiving WI, valid when port == 5) and wl_pref (the wireless path was
// the shorter one, whether taken or not) out. No clock: pure logic.
module wihet_route
  import wihet_pkg::*;
#(
  parameter int MY_TILE = 0
) (
  input  tile_t              dst,
  input  logic               wl_ok,
  output logic [PORT_W-1:0]  port,
  output tile_t              wl_tgt,
  output logic               wl_pref
);

  localparam int MY_X  = tile_x(MY_TILE);
  localparam int MY_Y  = tile_y(MY_TILE);
  localparam int MY_CH = wi_channel(MY_TILE);

  // Per-destination wireless table, computed at elaboration: for every destination the
  // receiving WI that gives the shortest wireless path, and whether that path is
  // strictly shorter than the wireline-only one. Ties go to the lowest tile number.
  typedef logic [N_TILES-1:0][TILE_W-1:0] tgt_tab_t;

  function automatic tgt_tab_t build_tgt();
    tgt_tab_t tab;
    for (int d = 0; d < N_TILES; d++) begin
      int best_d, best_t;
      best_d = manhattan(MY_TILE, d);
      best_t = MY_TILE;
      if (MY_CH >= 0)
        for (int u = 0; u < N_TILES; u++)
          if (u != MY_TILE && wi_channel(u) == MY_CH && 1 + manhattan(u, d) < best_d) begin
            best_d = 1 + manhattan(u, d);
            best_t = u;
          end
      tab[d] = TILE_W'(best_t);
    end
    return tab;
  endfunction

  function automatic logic [N_TILES-1:0] build_pref();
    logic [N_TILES-1:0] pref;
    tgt_tab_t tab;
    tab = build_tgt();
    for (int d = 0; d < N_TILES; d++) pref[d] = (int'(tab[d]) != MY_TILE);
    return pref;
  endfunction

  localparam tgt_tab_t           TGT_TAB  = build_tgt();
  localparam logic [N_TILES-1:0] PREF_TAB = build_pref();

  logic [3:0] dst_x, dst_y;

  assign dst_x = 4'(int'(dst) % MESH_X);
  assign dst_y = 4'(int'(dst) / MESH_X);

  always_comb begin
    wl_pref = PREF_TAB[dst];
    wl_tgt  = TGT_TAB[dst];

    if (int'(dst) == MY_TILE)      port = PORT_W'(P_LOCAL);
    else if (wl_pref && wl_ok)     port = PORT_W'(P_WL);
    else if (int'(dst_x) > MY_X)   port = PORT_W'(P_E);
    else if (int'(dst_x) < MY_X)   port = PORT_W'(P_W);
    else if (int'(dst_y) > MY_Y)   port = PORT_W'(P_S);
    else                           port = PORT_W'(P_N);
  end

endmodule
