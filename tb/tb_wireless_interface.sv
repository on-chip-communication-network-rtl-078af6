// tb_wireless_interface -- self-checking test of the wireless interface with its MAC,
// three WIs sharing one wireless_channel model.
//
// WIs sit on tiles 10, 20 and 30 (slots 0, 1, 2). Checks:
//  * a frame from tile 10 to tile 30 arrives intact and is handed to the router
//    2 + N_WI + TX_CYCLES edges after its write into the transmit queue (start cycle,
//    request period, serialisation, one edge in the receive queue);
//  * tile 20 does not take a frame addressed to tile 30;
//  * two senders at once are both served (contention resolved by the MAC);
//  * a receiver whose queue is full does not acknowledge, the sender keeps the frame and
//    all frames arrive in order once the receiver drains;
//  * the transmit queue reports busy (tx_ready low) when full.
module tb_wireless_interface;
  import wihet_pkg::*;

  localparam int NW = 3;
  localparam int TILE [NW] = '{10, 20, 30};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      tx_valid [NW];
  wl_frame_t tx_frame [NW];
  logic      tx_ready [NW];
  logic      rx_valid [NW];
  flit_t     rx_flit  [NW];
  logic      rx_ready [NW];
  logic      d_start [NW], d_req [NW], d_dv [NW], d_ack [NW];
  wl_frame_t d_frame [NW];
  logic      m_start, m_req, m_dv, m_ack;
  wl_frame_t m_frame;
  logic      ctd [NW], done [NW];
  logic [31:0] sent;

  for (genvar w = 0; w < NW; w++) begin : g_wi
    wireless_interface #(.MY_TILE(TILE[w]), .N_WI(NW), .MY_SLOT(w)) dut (
      .clk (clk), .rst_n (rst_n),
      .tx_valid (tx_valid[w]), .tx_frame (tx_frame[w]), .tx_ready (tx_ready[w]),
      .rx_valid (rx_valid[w]), .rx_flit (rx_flit[w]), .rx_ready (rx_ready[w]),
      .drv_start (d_start[w]), .drv_req (d_req[w]), .drv_dv (d_dv[w]),
      .drv_frame (d_frame[w]), .drv_ack (d_ack[w]),
      .med_start (m_start), .med_req (m_req), .med_dv (m_dv),
      .med_frame (m_frame), .med_ack (m_ack),
      .ev_contended (ctd[w]), .ev_tx_done (done[w])
    );
  end

  wireless_channel #(.N_WI(NW)) u_chan (
    .clk (clk), .rst_n (rst_n),
    .drv_start (d_start), .drv_req (d_req), .drv_dv (d_dv), .drv_frame (d_frame),
    .drv_ack (d_ack),
    .med_start (m_start), .med_req (m_req), .med_dv (m_dv), .med_frame (m_frame),
    .med_ack (m_ack), .frames_sent (sent)
  );

  int checks = 0, failures = 0;
  int edge_no = 0;
  int n_ctd = 0;
  typedef struct { int w; int at; flit_t f; } rx_t;
  rx_t got[$];

  always @(posedge clk) begin
    edge_no++;
    if (rst_n) begin
      for (int w = 0; w < NW; w++)
        if (rx_valid[w] && rx_ready[w]) got.push_back('{w, edge_no, rx_flit[w]});
      if (ctd[0]) n_ctd++;
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic wl_frame_t mk(input int src, input int tgt, input int id);
    wl_frame_t fr;
    fr.tgt          = tile_t'(tgt);
    fr.flit.dst     = tile_t'(tgt);
    fr.flit.src     = tile_t'(src);
    fr.flit.cls     = CLS_GPU_REPLY;
    fr.flit.payload = 32'hA500_0000 | 32'(id);
    return fr;
  endfunction

  task automatic push(input int w, input wl_frame_t fr, output int at);
    @(negedge clk);
    while (!tx_ready[w]) @(negedge clk);
    tx_valid[w] = 1;
    tx_frame[w] = fr;
    @(posedge clk);
    #1;
    at = edge_no;
    tx_valid[w] = 0;
  endtask

  function automatic int find(input int id);
    foreach (got[i]) if (got[i].f.payload == (32'hA500_0000 | 32'(id))) return i;
    return -1;
  endfunction

  initial begin
    int at, k;
    for (int w = 0; w < NW; w++) begin
      tx_valid[w] = 0; tx_frame[w] = '0; rx_ready[w] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // single frame 10 -> 30
    push(0, mk(10, 30, 1), at);
    repeat (1 + NW + TX_CYCLES + 4) @(posedge clk);
    k = find(1);
    checks++;
    if (k < 0) begin failures++; $display("FAIL: frame 1 lost"); end
    else begin
      checks++;
      if (got[k].w != 2 || got[k].f != mk(10, 30, 1).flit) begin
        failures++; $display("FAIL: frame 1 at WI %0d or corrupted", got[k].w);
      end
      checks++;
      if (got[k].at - at != 2 + NW + TX_CYCLES) begin
        failures++;
        $display("FAIL: wireless latency %0d, expected %0d", got[k].at - at, 2 + NW + TX_CYCLES);
      end
    end

    // two senders at once: 10 -> 20 and 30 -> 10
    fork
      push(0, mk(10, 20, 2), at);
      push(2, mk(30, 10, 3), at);
    join
    repeat (2 * (1 + NW + TX_CYCLES) + 6) @(posedge clk);
    checks++;
    if (find(2) < 0 || find(3) < 0 || got[find(2)].w != 1 || got[find(3)].w != 0) begin
      failures++; $display("FAIL: contending frames not both delivered");
    end
    checks++;
    if (n_ctd == 0) begin failures++; $display("FAIL: no contention seen"); end

    // receiver 30 stalled: 6 frames from 20 -> 30 (rx queue holds 4)
    rx_ready[2] = 0;
    fork
      begin
        for (int i = 0; i < 6; i++) push(1, mk(20, 30, 10 + i), at);
      end
      begin
        // transmit queue of 20 must fill up (report busy) while the receiver is stalled
        bit seen_busy;
        seen_busy = 0;
        repeat (12 * (1 + NW + TX_CYCLES)) begin
          @(posedge clk);
          if (!tx_ready[1]) seen_busy = 1;
        end
        checks++;
        if (!seen_busy) begin failures++; $display("FAIL: tx queue never busy"); end
      end
    join_any
    repeat (4 * (1 + NW + TX_CYCLES)) @(posedge clk);
    checks++;
    if (find(10) >= 0) begin failures++; $display("FAIL: stalled receiver delivered"); end
    @(negedge clk);
    rx_ready[2] = 1;
    repeat (8 * (1 + NW + TX_CYCLES)) @(posedge clk);
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (find(10 + i) < 0) begin failures++; $display("FAIL: frame %0d lost", 10 + i); end
      else if (i > 0 && find(10 + i) < find(9 + i)) begin
        failures++; $display("FAIL: frame %0d out of order", 10 + i);
      end
    end
    checks++;
    if (sent != 32'd9) begin failures++; $display("FAIL: channel counted %0d frames", sent); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
