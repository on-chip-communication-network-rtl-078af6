// tb_noc_router -- self-checking test of the router.
//
// Two routers are tested side by side: tile 9, an inner tile with four wireline
// neighbours and no WI (three-stage pipeline), and tile 17, an inner tile that also owns
// a WI (five inter-tile ports, so one extra arbitration stage). A monitor records every
// flit leaving every output with the clock edge it left on. Checks:
//  * per-hop latency: 3 edges from input-buffer write to output handshake on tile 9,
//    4 on tile 17;
//  * flits go to the port the destination calls for (east, local, wireless with the
//    right receiving WI), and to a wireline port when the wireless port is busy;
//  * three inputs contending for one output are all delivered, one per cycle, in
//    round-robin order;
//  * a stalled output (ready low) holds its flit and loses nothing.
module tb_noc_router;
  import wihet_pkg::*;

  localparam int NR = 2;
  localparam int TILES [NR] = '{9, 17};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  in_valid  [NR][N_PORTS];
  flit_t in_flit   [NR][N_PORTS];
  logic  in_ready  [NR][N_PORTS];
  logic  out_valid [NR][N_PORTS];
  flit_t out_flit  [NR][N_PORTS];
  logic  out_ready [NR][N_PORTS];
  tile_t wl_tgt    [NR];
  logic  wl_ok     [NR];
  logic  ev_sent   [NR];
  logic  ev_fb     [NR];

  for (genvar r = 0; r < NR; r++) begin : g_dut
    noc_router #(.MY_TILE(TILES[r])) dut (
      .clk (clk), .rst_n (rst_n),
      .in_valid (in_valid[r]), .in_flit (in_flit[r]), .in_ready (in_ready[r]),
      .out_valid (out_valid[r]), .out_flit (out_flit[r]), .out_ready (out_ready[r]),
      .out_wl_tgt (wl_tgt[r]), .wl_ok (wl_ok[r]),
      .ev_wl_sent (ev_sent[r]), .ev_wl_fallback (ev_fb[r])
    );
  end

  int checks = 0, failures = 0;
  int edge_no = 0;
  int n_fallback = 0, n_wl = 0;

  typedef struct {
    int    r;
    int    port;
    int    at;
    flit_t f;
    tile_t tgt;
  } seen_t;
  seen_t seen[$];

  always @(posedge clk) begin
    edge_no++;
    if (rst_n) begin
      for (int r = 0; r < NR; r++) begin
        for (int p = 0; p < N_PORTS; p++)
          if (out_valid[r][p] && out_ready[r][p])
            seen.push_back('{r, p, edge_no, out_flit[r][p], wl_tgt[r]});
        if (ev_fb[r])   n_fallback++;
        if (ev_sent[r]) n_wl++;
      end
    end
  end

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t mk(input int src, input int dst, input int id);
    flit_t f;
    f.dst = tile_t'(dst);
    f.src = tile_t'(src);
    f.cls = CLS_GPU_REQ;
    f.payload = 32'(id);
    return f;
  endfunction

  // drive one flit into router r, port p; returns the edge at which it was written
  task automatic send(input int r, input int p, input flit_t f, output int at);
    @(negedge clk);
    in_valid[r][p] = 1;
    in_flit[r][p]  = f;
    @(posedge clk);
    #1;
    at = edge_no;
    in_valid[r][p] = 0;
  endtask

  task automatic expect1(input string what, input int r, input int port, input int id,
                         input int lat, input int at, input int tgt);
    int found;
    found = -1;
    foreach (seen[i])
      if (seen[i].r == r && int'(seen[i].f.payload) == id) found = i;
    checks++;
    if (found < 0) begin
      failures++; $display("FAIL %s: flit %0d never left", what, id);
      return;
    end
    checks++;
    if (seen[found].port != port) begin
      failures++; $display("FAIL %s: left on port %0d, expected %0d", what, seen[found].port, port);
    end
    if (lat >= 0) begin
      checks++;
      if (seen[found].at - at != lat) begin
        failures++; $display("FAIL %s: latency %0d, expected %0d", what, seen[found].at - at, lat);
      end
    end
    if (tgt >= 0) begin
      checks++;
      if (int'(seen[found].tgt) != tgt) begin
        failures++; $display("FAIL %s: wireless target %0d, expected %0d", what, seen[found].tgt, tgt);
      end
    end
  endtask

  initial begin
    int at, t0;
    for (int r = 0; r < NR; r++) begin
      wl_ok[r] = 1;
      for (int p = 0; p < N_PORTS; p++) begin
        in_valid[r][p] = 0; in_flit[r][p] = '0; out_ready[r][p] = 1;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // hop latency, tile 9 (3 stages) and tile 17 (extra arbitration stage)
    send(0, P_LOCAL, mk(9, 12, 1), at);
    repeat (6) @(posedge clk);
    expect1("tile 9 east", 0, P_E, 1, 3, at, -1);
    send(1, P_LOCAL, mk(17, 20, 2), at);
    repeat (6) @(posedge clk);
    expect1("tile 17 east", 1, P_E, 2, 4, at, -1);

    // ejection at the destination
    send(0, P_N, mk(1, 9, 3), at);
    repeat (6) @(posedge clk);
    expect1("tile 9 local", 0, P_LOCAL, 3, 3, at, -1);

    // wireless shortcut from tile 17 towards tile 62: the WIs on tiles 61 and 63 are both
    // one grid hop from it; ties go to the lower tile number
    send(1, P_LOCAL, mk(17, 62, 4), at);
    repeat (6) @(posedge clk);
    expect1("tile 17 wireless", 1, P_WL, 4, 4, at, 61);

    // wireless busy: same destination goes east over wireline
    wl_ok[1] = 0;
    send(1, P_LOCAL, mk(17, 62, 5), at);
    repeat (6) @(posedge clk);
    expect1("tile 17 fallback", 1, P_E, 5, 4, at, -1);
    wl_ok[1] = 1;
    checks++;
    if (n_fallback != 1 || n_wl != 1) begin
      failures++; $display("FAIL: events wireless %0d fallback %0d", n_wl, n_fallback);
    end

    // three inputs of tile 9 contend for east
    @(negedge clk);
    in_valid[0][P_LOCAL] = 1; in_flit[0][P_LOCAL] = mk(9, 13, 10);
    in_valid[0][P_N]     = 1; in_flit[0][P_N]     = mk(1, 14, 11);
    in_valid[0][P_W]     = 1; in_flit[0][P_W]     = mk(8, 15, 12);
    @(posedge clk);
    #1;
    t0 = edge_no;
    in_valid[0][P_LOCAL] = 0; in_valid[0][P_N] = 0; in_valid[0][P_W] = 0;
    repeat (8) @(posedge clk);
    begin
      int ids[$];
      int ats[$];
      foreach (seen[i])
        if (seen[i].r == 0 && seen[i].port == P_E && seen[i].at > t0) begin
          ids.push_back(int'(seen[i].f.payload));
          ats.push_back(seen[i].at);
        end
      checks++;
      if (ids.size() != 3) begin
        failures++; $display("FAIL contention: %0d of 3 delivered", ids.size());
      end else begin
        // east arbiter last granted input 0 (local); round robin: N(1), W(4), local(0)
        checks++;
        if (ids[0] != 11 || ids[1] != 12 || ids[2] != 10) begin
          failures++; $display("FAIL contention order %0d %0d %0d", ids[0], ids[1], ids[2]);
        end
        checks++;
        if (ats[0] - t0 != 3 || ats[1] - ats[0] != 1 || ats[2] - ats[1] != 1) begin
          failures++; $display("FAIL contention timing %0d %0d %0d", ats[0] - t0, ats[1], ats[2]);
        end
      end
    end

    // stalled output holds its flit
    out_ready[0][P_S] = 0;
    send(0, P_LOCAL, mk(9, 57, 20), at);
    repeat (10) @(posedge clk);
    checks++;
    begin
      bit early;
      early = 0;
      foreach (seen[i]) if (int'(seen[i].f.payload) == 20) early = 1;
      if (early || !out_valid[0][P_S] || int'(out_flit[0][P_S].payload) != 20) begin
        failures++; $display("FAIL stall: flit not held");
      end
    end
    @(negedge clk);
    out_ready[0][P_S] = 1;
    repeat (3) @(posedge clk);
    expect1("tile 9 after stall", 0, P_S, 20, -1, at, -1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
