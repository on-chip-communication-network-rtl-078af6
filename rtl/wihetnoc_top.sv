// wihetnoc_top -- wireless-enabled heterogeneous NoC (WiHetNoC) for an 8 x 8 tile
// CPU/GPU/memory-controller chip.
//
// 64 routers (noc_router), one per tile, joined by wireline links between grid
// neighbours, plus 32 wireless interfaces (wireless_interface) on five wireless channels
// (wireless_channel): channel 0 links the 4 CPU tiles and the 4 memory-controller tiles
// in a single hop, channels 1..4 each carry six WIs for GPU<->MC traffic. Tile kinds,
// channel membership and slot numbers come from wihet_pkg.
//
// The cores, caches, memory controllers and DRAM are not part of this RTL: each tile's
// local router port is brought out (inj_* into the network, ej_* out of it) so that a
// core model or traffic generator can be attached. A flit entering at tile s addressed
// to tile d leaves at tile d's ej_* port.
//
// The wireline connectivity here is the grid mesh; the design's own wireline links come
// from an offline optimisation (k_avg = 4, k_max = 6, same link count as a mesh) whose
// result is not published, so the mesh stands in for it. Everything that uses the
// connectivity is parameterised by tile number, so another link list can replace it.
//
// Interface: per-tile valid/ready injection and ejection ports; per-tile event pulses
// for wireless use and wireline fallback; per-channel event pulses for MAC contention
// and frames delivered.
module wihetnoc_top
  import wihet_pkg::*;
#(
  parameter int BUF_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inj_valid [N_TILES],
  input  flit_t inj_flit  [N_TILES],
  output logic  inj_ready [N_TILES],
  output logic  ej_valid  [N_TILES],
  output flit_t ej_flit   [N_TILES],
  input  logic  ej_ready  [N_TILES],
  output logic  ev_wl_sent     [N_TILES],
  output logic  ev_wl_fallback [N_TILES],
  output logic  ev_contended   [N_CHANNELS],
  output logic  ev_frame_done  [N_CHANNELS]
);

  // router port signals
  logic  r_in_valid  [N_TILES][N_PORTS];
  flit_t r_in_flit   [N_TILES][N_PORTS];
  logic  r_in_ready  [N_TILES][N_PORTS];
  logic  r_out_valid [N_TILES][N_PORTS];
  flit_t r_out_flit  [N_TILES][N_PORTS];
  logic  r_out_ready [N_TILES][N_PORTS];
  tile_t r_wl_tgt    [N_TILES];
  logic  r_wl_ok     [N_TILES];

  // wireless interface <-> medium, indexed by tile
  logic      w_start [N_TILES];
  logic      w_req   [N_TILES];
  logic      w_dv    [N_TILES];
  wl_frame_t w_frame [N_TILES];
  logic      w_ack   [N_TILES];
  logic      w_ctd   [N_TILES];

  // broadcast lines per channel
  logic      m_start [N_CHANNELS];
  logic      m_req   [N_CHANNELS];
  logic      m_dv    [N_CHANNELS];
  wl_frame_t m_frame [N_CHANNELS];
  logic      m_ack   [N_CHANNELS];

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    localparam int X  = tile_x(t);
    localparam int Y  = tile_y(t);
    localparam int CH = wi_channel(t);

    noc_router #(.MY_TILE(t), .BUF_DEPTH(BUF_DEPTH)) u_router (
      .clk            (clk),
      .rst_n          (rst_n),
      .in_valid       (r_in_valid[t]),
      .in_flit        (r_in_flit[t]),
      .in_ready       (r_in_ready[t]),
      .out_valid      (r_out_valid[t]),
      .out_flit       (r_out_flit[t]),
      .out_ready      (r_out_ready[t]),
      .out_wl_tgt     (r_wl_tgt[t]),
      .wl_ok          (r_wl_ok[t]),
      .ev_wl_sent     (ev_wl_sent[t]),
      .ev_wl_fallback (ev_wl_fallback[t])
    );

    // local port
    assign r_in_valid[t][P_LOCAL]  = inj_valid[t];
    assign r_in_flit[t][P_LOCAL]   = inj_flit[t];
    assign inj_ready[t]            = r_in_ready[t][P_LOCAL];
    assign ej_valid[t]             = r_out_valid[t][P_LOCAL];
    assign ej_flit[t]              = r_out_flit[t][P_LOCAL];
    assign r_out_ready[t][P_LOCAL] = ej_ready[t];

    // north neighbour: its south output feeds our north input
    if (Y > 0) begin : g_n
      assign r_in_valid[t][P_N]  = r_out_valid[t-MESH_X][P_S];
      assign r_in_flit[t][P_N]   = r_out_flit[t-MESH_X][P_S];
      assign r_out_ready[t][P_N] = r_in_ready[t-MESH_X][P_S];
    end else begin : g_n_edge
      assign r_in_valid[t][P_N]  = 1'b0;
      assign r_in_flit[t][P_N]   = '0;
      assign r_out_ready[t][P_N] = 1'b1;
    end

    if (X < MESH_X - 1) begin : g_e
      assign r_in_valid[t][P_E]  = r_out_valid[t+1][P_W];
      assign r_in_flit[t][P_E]   = r_out_flit[t+1][P_W];
      assign r_out_ready[t][P_E] = r_in_ready[t+1][P_W];
    end else begin : g_e_edge
      assign r_in_valid[t][P_E]  = 1'b0;
      assign r_in_flit[t][P_E]   = '0;
      assign r_out_ready[t][P_E] = 1'b1;
    end

    if (Y < MESH_Y - 1) begin : g_s
      assign r_in_valid[t][P_S]  = r_out_valid[t+MESH_X][P_N];
      assign r_in_flit[t][P_S]   = r_out_flit[t+MESH_X][P_N];
      assign r_out_ready[t][P_S] = r_in_ready[t+MESH_X][P_N];
    end else begin : g_s_edge
      assign r_in_valid[t][P_S]  = 1'b0;
      assign r_in_flit[t][P_S]   = '0;
      assign r_out_ready[t][P_S] = 1'b1;
    end

    if (X > 0) begin : g_w
      assign r_in_valid[t][P_W]  = r_out_valid[t-1][P_E];
      assign r_in_flit[t][P_W]   = r_out_flit[t-1][P_E];
      assign r_out_ready[t][P_W] = r_in_ready[t-1][P_E];
    end else begin : g_w_edge
      assign r_in_valid[t][P_W]  = 1'b0;
      assign r_in_flit[t][P_W]   = '0;
      assign r_out_ready[t][P_W] = 1'b1;
    end

    // wireless port
    if (CH >= 0) begin : g_wi
      wl_frame_t tx_frame;
      assign tx_frame.tgt  = r_wl_tgt[t];
      assign tx_frame.flit = r_out_flit[t][P_WL];

      wireless_interface #(
        .MY_TILE (t),
        .N_WI    (wi_count(CH)),
        .MY_SLOT (wi_slot(t))
      ) u_wi (
        .clk          (clk),
        .rst_n        (rst_n),
        .tx_valid     (r_out_valid[t][P_WL]),
        .tx_frame     (tx_frame),
        .tx_ready     (r_out_ready[t][P_WL]),
        .rx_valid     (r_in_valid[t][P_WL]),
        .rx_flit      (r_in_flit[t][P_WL]),
        .rx_ready     (r_in_ready[t][P_WL]),
        .drv_start    (w_start[t]),
        .drv_req      (w_req[t]),
        .drv_dv       (w_dv[t]),
        .drv_frame    (w_frame[t]),
        .drv_ack      (w_ack[t]),
        .med_start    (m_start[CH]),
        .med_req      (m_req[CH]),
        .med_dv       (m_dv[CH]),
        .med_frame    (m_frame[CH]),
        .med_ack      (m_ack[CH]),
        .ev_contended (w_ctd[t]),
        .ev_tx_done   ()
      );
      assign r_wl_ok[t] = r_out_ready[t][P_WL];
    end else begin : g_no_wi
      assign r_in_valid[t][P_WL]  = 1'b0;
      assign r_in_flit[t][P_WL]   = '0;
      assign r_out_ready[t][P_WL] = 1'b1;
      assign r_wl_ok[t]           = 1'b0;
      assign w_start[t] = 1'b0;
      assign w_req[t]   = 1'b0;
      assign w_dv[t]    = 1'b0;
      assign w_frame[t] = '0;
      assign w_ack[t]   = 1'b0;
      assign w_ctd[t]   = 1'b0;
    end
  end

  // one shared medium per frequency channel
  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_ch
    localparam int NW = wi_count(c);
    logic      c_start [NW];
    logic      c_req   [NW];
    logic      c_dv    [NW];
    wl_frame_t c_frame [NW];
    logic      c_ack   [NW];

    for (genvar s = 0; s < NW; s++) begin : g_slot
      localparam int T = wi_tile(c, s);
      assign c_start[s] = w_start[T];
      assign c_req[s]   = w_req[T];
      assign c_dv[s]    = w_dv[T];
      assign c_frame[s] = w_frame[T];
      assign c_ack[s]   = w_ack[T];
    end

    wireless_channel #(.N_WI(NW)) u_chan (
      .clk         (clk),
      .rst_n       (rst_n),
      .drv_start   (c_start),
      .drv_req     (c_req),
      .drv_dv      (c_dv),
      .drv_frame   (c_frame),
      .drv_ack     (c_ack),
      .med_start   (m_start[c]),
      .med_req     (m_req[c]),
      .med_dv      (m_dv[c]),
      .med_frame   (m_frame[c]),
      .med_ack     (m_ack[c]),
      .frames_sent ()
    );

    // every MAC copy of a channel reports the same contention; take the first WI's
    assign ev_contended[c]  = w_ctd[wi_tile(c, 0)];
    assign ev_frame_done[c] = m_ack[c];
  end

endmodule
