// tb_wi_mac -- self-checking test of the distributed MAC.
//
// Four MAC copies (N_WI = 4, TX_CYCLES = 3) share a medium modelled here as wired ORs.
// Each copy has a frame counter standing in for its transmit queue. Checks:
//  * a lone request: the request period lasts exactly N_WI cycles after the start cycle,
//    the requester alone drives data for exactly TX_CYCLES cycles;
//  * three simultaneous requesters (WIs 0, 1, 3) are served in round-robin order after
//    the previous winner, every copy agrees (never two senders at once), and contention
//    is reported;
//  * a missing acknowledgement keeps the frame, which is sent again later.
module tb_wi_mac;
  localparam int N  = 4;
  localparam int TX = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   frames [N];
  logic has    [N];
  logic d_start[N], d_req[N], d_data[N], last[N], done[N], ctd[N];
  logic m_start, m_req, m_ack;
  logic ack_en;

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_contended = 0;
  int order[$];

  for (genvar w = 0; w < N; w++) begin : g_mac
    assign has[w] = frames[w] > 0;
    wi_mac #(.N_WI(N), .MY_SLOT(w), .TX_CYCLES(TX)) dut (
      .clk (clk), .rst_n (rst_n), .has_frame (has[w]),
      .med_start (m_start), .med_req (m_req), .med_ack (m_ack),
      .drv_start (d_start[w]), .drv_req (d_req[w]), .drv_data (d_data[w]),
      .data_last (last[w]), .tx_done (done[w]), .contended (ctd[w])
    );
  end

  always_comb begin
    m_start = 0; m_req = 0;
    for (int w = 0; w < N; w++) begin
      m_start |= d_start[w];
      m_req   |= d_req[w];
    end
    m_ack = ack_en && last[0];
  end

  int n_data;
  always @(posedge clk) begin
    cycle++;
    n_data = 0;
    for (int w = 0; w < N; w++) n_data += int'(d_data[w]);
    if (rst_n) begin
      checks++;
      if (n_data > 1) begin failures++; $display("FAIL: %0d senders", n_data); end
      for (int w = 1; w < N; w++) begin
        checks++;
        if (last[w] != last[0]) begin failures++; $display("FAIL: MAC copies disagree"); end
      end
      if (ctd[0]) n_contended++;
      for (int w = 0; w < N; w++)
        if (done[w]) begin
          frames[w] <= frames[w] - 1;
          order.push_back(w);
        end
    end
  end

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_cycles(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    int t_start, t_data, t_end;
    for (int w = 0; w < N; w++) frames[w] = 0;
    ack_en = 1;
    wait_cycles(3);
    rst_n = 1;
    wait_cycles(2);

    // lone request from WI 2
    @(negedge clk);
    frames[2] = 1;
    t_start = cycle;
    while (!d_data[2]) @(negedge clk);
    t_data = cycle;
    while (d_data[2]) @(negedge clk);
    t_end = cycle;
    checks++;
    if (t_data - t_start != 1 + N) begin
      failures++;
      $display("FAIL: access latency %0d, expected %0d", t_data - t_start, 1 + N);
    end
    checks++;
    if (t_end - t_data != TX) begin
      failures++;
      $display("FAIL: data period %0d, expected %0d", t_end - t_data, TX);
    end
    checks++;
    if (frames[2] != 0 || order.size() != 1 || order[0] != 2) begin
      failures++;
      $display("FAIL: lone frame not delivered");
    end
    wait_cycles(3);

    // WIs 0, 1 and 3 at once; last winner is 2 -> order 3, 0, 1
    @(negedge clk);
    order.delete();
    frames[0] = 1; frames[1] = 1; frames[3] = 1;
    wait_cycles(4 * (1 + N + TX) + 5);
    checks++;
    if (order.size() != 3 || order[0] != 3 || order[1] != 0 || order[2] != 1) begin
      failures++;
      $display("FAIL: round-robin order wrong (%0d served)", order.size());
      foreach (order[i]) $display("  served %0d", order[i]);
    end
    checks++;
    if (n_contended == 0) begin failures++; $display("FAIL: contention never reported"); end

    // no acknowledgement: WI 0's frame must stay until acked
    @(negedge clk);
    order.delete();
    ack_en = 0;
    frames[0] = 1;
    wait_cycles(3 * (1 + N + TX));
    checks++;
    if (frames[0] != 1 || order.size() != 0) begin
      failures++; $display("FAIL: frame dropped without acknowledgement");
    end
    ack_en = 1;
    wait_cycles(2 * (1 + N + TX) + 2);
    checks++;
    if (frames[0] != 0 || order.size() != 1) begin
      failures++; $display("FAIL: frame not resent after acknowledgement returned");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
