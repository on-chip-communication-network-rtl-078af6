// noc_router -- pipelined router of one tile of the hybrid wireline/wireless NoC.
//
// Six ports: local core, north, east, south, west and the wireless interface (WI).
// Ports whose neighbour does not exist are tied off by the instantiating level.
// Each input has a FIFO buffer. The flit at the head of each buffer is routed by
// wihet_route; each output has a round-robin switch allocator that picks one of the
// inputs requesting it, and the winner leaves its buffer and enters the output pipeline.
//
// Pipeline (per hop, without stalls, a flit written into an input buffer in cycle t
// leaves on the output link in cycle t+3):
//   stage 1  buffer write       (input FIFO)
//   stage 2  route + allocation (head of FIFO -> allocation register)
//   stage 3  switch traversal   (allocation register -> output link register)
// A router with more than four inter-tile ports (wireline neighbours plus the wireless
// port) adds one more arbitration register, one cycle more per hop, as the design does
// for its larger routers. The three stages and the extra arbitration stage follow the
// design; which work goes into which stage, the buffer depth and the valid/ready link
// handshake are this implementation's choices. Each output stage is an elastic register:
// it takes a new flit when it is empty or its content moves on in the same cycle.
//
// Interface: in_* / out_* valid-ready links per port (a flit moves when valid and ready
// are both high), out_wl_tgt is the receiving WI of the flit on the wireless output,
// wl_ok says the WI can take a flit. ev_wl_sent / ev_wl_fallback pulse when a flit is
// allocated to the wireless port, or re-routed over wireline because the WI was busy.
module noc_router
  import wihet_pkg::*;
#(
  parameter int MY_TILE   = 0,
  parameter int BUF_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid  [N_PORTS],
  input  flit_t in_flit   [N_PORTS],
  output logic  in_ready  [N_PORTS],
  output logic  out_valid [N_PORTS],
  output flit_t out_flit  [N_PORTS],
  input  logic  out_ready [N_PORTS],
  output tile_t out_wl_tgt,
  input  logic  wl_ok,
  output logic  ev_wl_sent,
  output logic  ev_wl_fallback
);

  localparam bit EXTRA_ARB = inter_tile_ports(MY_TILE) > 4;
  localparam int NSTG      = EXTRA_ARB ? 3 : 2;

  // ---------------- stage 1: input buffers ----------------
  flit_t             head     [N_PORTS];
  logic              empty    [N_PORTS];
  logic              full     [N_PORTS];
  logic              pop      [N_PORTS];
  logic [PORT_W-1:0] rport    [N_PORTS];
  tile_t             rtgt     [N_PORTS];
  logic              rpref    [N_PORTS];

  for (genvar i = 0; i < N_PORTS; i++) begin : g_in
    sync_fifo #(.WIDTH(FLIT_W), .DEPTH(BUF_DEPTH)) u_buf (
      .clk   (clk),
      .rst_n (rst_n),
      .push  (in_valid[i]),
      .wdata (in_flit[i]),
      .pop   (pop[i]),
      .rdata (head[i]),
      .empty (empty[i]),
      .full  (full[i])
    );
    assign in_ready[i] = !full[i];

    wihet_route #(.MY_TILE(MY_TILE)) u_route (
      .dst     (head[i].dst),
      .wl_ok   (wl_ok),
      .port    (rport[i]),
      .wl_tgt  (rtgt[i]),
      .wl_pref (rpref[i])
    );
  end

  // ---------------- output pipelines (elastic registers) ----------------
  logic      st_v   [N_PORTS][NSTG];
  wl_frame_t st_d   [N_PORTS][NSTG];
  logic      st_adv [N_PORTS][NSTG];   // content of stage k moves on this cycle
  logic      acc0   [N_PORTS];         // stage 0 can take a new flit

  always_comb begin
    for (int o = 0; o < N_PORTS; o++) begin
      for (int k = NSTG - 1; k >= 0; k--) begin
        if (k == NSTG - 1) st_adv[o][k] = st_v[o][k] && out_ready[o];
        else               st_adv[o][k] = st_v[o][k] && (!st_v[o][k+1] || st_adv[o][k+1]);
      end
      acc0[o] = !st_v[o][0] || st_adv[o][0];
    end
  end

  // ---------------- stage 2: switch allocation ----------------
  logic [N_PORTS-1:0] req   [N_PORTS];   // req[o][i]: input i wants output o
  logic [N_PORTS-1:0] grant [N_PORTS];

  always_comb begin
    for (int o = 0; o < N_PORTS; o++)
      for (int i = 0; i < N_PORTS; i++)
        req[o][i] = !empty[i] && (int'(rport[i]) == o);
  end

  for (genvar o = 0; o < N_PORTS; o++) begin : g_arb
    rr_arbiter #(.N(N_PORTS)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (req[o]),
      .advance (acc0[o]),
      .grant   (grant[o])
    );
  end

  // pop / load decisions
  logic      load    [N_PORTS];
  wl_frame_t load_d  [N_PORTS];

  always_comb begin
    ev_wl_sent     = 1'b0;
    ev_wl_fallback = 1'b0;
    for (int i = 0; i < N_PORTS; i++) pop[i] = 1'b0;
    for (int o = 0; o < N_PORTS; o++) begin
      load[o]   = 1'b0;
      load_d[o] = '0;
      for (int i = 0; i < N_PORTS; i++) begin
        if (grant[o][i] && acc0[o]) begin
          pop[i]         = 1'b1;
          load[o]        = 1'b1;
          load_d[o].flit = head[i];
          load_d[o].tgt  = rtgt[i];
          if (o == P_WL)                      ev_wl_sent     = 1'b1;
          else if (rpref[i] && o != P_LOCAL)  ev_wl_fallback = 1'b1;
        end
      end
    end
  end

  // ---------------- stage 3 (and extra arbitration stage): registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_PORTS; o++)
        for (int k = 0; k < NSTG; k++) st_v[o][k] <= 1'b0;
    end else begin
      for (int o = 0; o < N_PORTS; o++) begin
        for (int k = NSTG - 1; k >= 1; k--) begin
          if (st_adv[o][k-1])   st_v[o][k] <= 1'b1;
          else if (st_adv[o][k]) st_v[o][k] <= 1'b0;
        end
        if (load[o])           st_v[o][0] <= 1'b1;
        else if (st_adv[o][0]) st_v[o][0] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < N_PORTS; o++) begin
      for (int k = NSTG - 1; k >= 1; k--)
        if (st_adv[o][k-1]) st_d[o][k] <= st_d[o][k-1];
      if (load[o]) st_d[o][0] <= load_d[o];
    end
  end

  always_comb begin
    for (int o = 0; o < N_PORTS; o++) begin
      out_valid[o] = st_v[o][NSTG-1];
      out_flit[o]  = st_d[o][NSTG-1].flit;
    end
    out_wl_tgt = st_d[P_WL][NSTG-1].tgt;
  end

  // A flit never turns back to the port it came from.
  for (genvar i = 1; i < N_PORTS; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(pop[i] && int'(rport[i]) == i))
      else $error("noc_router %0d: U-turn on port %0d", MY_TILE, i);
  end

endmodule
