// tb_wihetnoc_top -- end-to-end test of the whole 64-tile hybrid NoC at its default
// parameters.
//
// Every tile runs a small traffic source shaped like CNN training traffic on a CPU/GPU
// chip: GPUs send requests to the memory controllers (MCs), MCs send replies back to
// GPUs at a higher rate (the MC-to-core direction carries more data), and the CPUs
// exchange requests and replies with the MCs. Each message carries a unique number in
// its payload. A scoreboard checks that every message leaves the network exactly once,
// at the tile it was addressed to, with its source and class intact. Some ejection ports
// are randomly stalled.
//
// The test counts how often each mechanism of the design happened and fails if one
// never did: wireless shortcut taken, fallback to wireline when a WI was busy, MAC
// contention on a channel, frames carried on the CPU-MC channel and on each GPU-MC
// channel, injection back-pressure and ejection stalls.
module tb_wihetnoc_top;
  import wihet_pkg::*;

  localparam int N_MSG_PER_TILE = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  inj_valid [N_TILES];
  flit_t inj_flit  [N_TILES];
  logic  inj_ready [N_TILES];
  logic  ej_valid  [N_TILES];
  flit_t ej_flit   [N_TILES];
  logic  ej_ready  [N_TILES];
  logic  ev_wl_sent     [N_TILES];
  logic  ev_wl_fallback [N_TILES];
  logic  ev_contended   [N_CHANNELS];
  logic  ev_frame_done  [N_CHANNELS];

  wihetnoc_top dut (
    .clk (clk), .rst_n (rst_n),
    .inj_valid (inj_valid), .inj_flit (inj_flit), .inj_ready (inj_ready),
    .ej_valid (ej_valid), .ej_flit (ej_flit), .ej_ready (ej_ready),
    .ev_wl_sent (ev_wl_sent), .ev_wl_fallback (ev_wl_fallback),
    .ev_contended (ev_contended), .ev_frame_done (ev_frame_done)
  );

  int checks = 0, failures = 0;
  int cycle = 0;

  // scoreboard, indexed by message number
  localparam int MAXMSG = N_TILES * N_MSG_PER_TILE * 2;
  int  exp_dst [MAXMSG];
  int  exp_src [MAXMSG];
  int  exp_cls [MAXMSG];
  bit  got     [MAXMSG];
  int  sent_at [MAXMSG];
  int  n_issued = 0, n_got = 0;
  longint lat_sum [4];
  int  lat_n [4];

  // mechanism counters
  int c_wl = 0, c_fb = 0, c_bp = 0, c_ej_stall = 0;
  int c_ctd [N_CHANNELS];
  int c_frames [N_CHANNELS];

  int left_to_send [N_TILES];
  int mcs [4] = '{18, 21, 42, 45};
  int cpus [4] = '{27, 28, 35, 36};

  function automatic int rand_gpu();
    int t;
    do t = $urandom_range(0, N_TILES - 1); while (kind_of(t) != T_GPU);
    return t;
  endfunction

  // what tile t sends next: returns destination and class
  task automatic pick_msg(input int t, output int dst, output msg_class_e cls);
    case (kind_of(t))
      T_GPU: begin dst = mcs[$urandom_range(0, 3)]; cls = CLS_GPU_REQ; end
      T_CPU: begin dst = mcs[$urandom_range(0, 3)]; cls = CLS_CPU_REQ; end
      default: begin
        if ($urandom_range(0, 3) == 0) begin dst = cpus[$urandom_range(0, 3)]; cls = CLS_CPU_REPLY; end
        else                           begin dst = rand_gpu();                  cls = CLS_GPU_REPLY; end
      end
    endcase
  endtask

  // sources: MCs send replies back-to-back, cores inject with some probability
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      for (int t = 0; t < N_TILES; t++) begin
        if (inj_valid[t] && inj_ready[t]) begin
          left_to_send[t]--;
          inj_valid[t] <= 1'b0;
        end
        if (inj_valid[t] && !inj_ready[t]) c_bp++;
        if (ev_wl_sent[t])     c_wl++;
        if (ev_wl_fallback[t]) c_fb++;
        if (ej_valid[t] && !ej_ready[t]) c_ej_stall++;
        if (ej_valid[t] && ej_ready[t]) begin
          int id;
          id = int'(ej_flit[t].payload);
          checks++;
          if (id < 0 || id >= n_issued || got[id] || exp_dst[id] != t ||
              exp_src[id] != int'(ej_flit[t].src) || exp_cls[id] != int'(ej_flit[t].cls) ||
              int'(ej_flit[t].dst) != t) begin
            failures++;
            if (failures < 10) $display("FAIL: tile %0d ejected bad message %0d", t, id);
          end else begin
            got[id] = 1;
            n_got++;
            lat_sum[int'(ej_flit[t].cls)] += longint'(cycle - sent_at[id]);
            lat_n[int'(ej_flit[t].cls)]++;
          end
        end
      end
      for (int c = 0; c < N_CHANNELS; c++) begin
        if (ev_contended[c])  c_ctd[c]++;
        if (ev_frame_done[c]) c_frames[c]++;
      end
      // new messages
      for (int t = 0; t < N_TILES; t++) begin
        bit busy;
        busy = inj_valid[t] && !inj_ready[t];
        if (!busy && left_to_send[t] - ((inj_valid[t] && inj_ready[t]) ? 1 : 0) > 0) begin
          int rate;
          rate = (kind_of(t) == T_MC) ? 100 : 25;
          if ($urandom_range(0, 99) < rate) begin
            int d;
            msg_class_e cl;
            pick_msg(t, d, cl);
            exp_dst[n_issued] = d;
            exp_src[n_issued] = t;
            exp_cls[n_issued] = int'(cl);
            sent_at[n_issued] = cycle;
            inj_flit[t] <= '{dst: tile_t'(d), src: tile_t'(t), cls: cl, payload: 32'(n_issued)};
            inj_valid[t] <= 1'b1;
            n_issued++;
          end
        end
      end
      // random ejection stalls on a few tiles
      for (int t = 0; t < N_TILES; t += 7)
        ej_ready[t] <= ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog: %0d of %0d messages delivered", n_got, n_issued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    for (int t = 0; t < N_TILES; t++) begin
      inj_valid[t] = 0; inj_flit[t] = '0; ej_ready[t] = 1;
      left_to_send[t] = (kind_of(t) == T_MC) ? 4 * N_MSG_PER_TILE : N_MSG_PER_TILE / 2;
    end
    for (int c = 0; c < N_CHANNELS; c++) begin c_ctd[c] = 0; c_frames[c] = 0; end
    for (int k = 0; k < 4; k++) begin lat_sum[k] = 0; lat_n[k] = 0; end
    total = 0;
    for (int t = 0; t < N_TILES; t++) total += left_to_send[t];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run until every message has been sent and received
    do @(posedge clk); while (n_got < total);
    repeat (20) @(posedge clk);

    checks++;
    if (n_got != total || n_issued != total) begin
      failures++; $display("FAIL: %0d issued, %0d delivered, %0d planned", n_issued, n_got, total);
    end
    $display("messages %0d delivered in %0d cycles", n_got, cycle);
    $display("mean latency (cycles): cpu req %0d, cpu reply %0d, gpu req %0d, gpu reply %0d",
             lat_n[0] ? lat_sum[0] / lat_n[0] : 0, lat_n[1] ? lat_sum[1] / lat_n[1] : 0,
             lat_n[2] ? lat_sum[2] / lat_n[2] : 0, lat_n[3] ? lat_sum[3] / lat_n[3] : 0);
    $display("wireless hops %0d, wireline fallbacks %0d, injection back-pressure %0d, ejection stalls %0d",
             c_wl, c_fb, c_bp, c_ej_stall);
    for (int c = 0; c < N_CHANNELS; c++)
      $display("channel %0d: frames %0d, contended request periods %0d", c, c_frames[c], c_ctd[c]);

    checks++; if (c_wl == 0)       begin failures++; $display("FAIL: no wireless hop"); end
    checks++; if (c_fb == 0)       begin failures++; $display("FAIL: no wireline fallback"); end
    checks++; if (c_bp == 0)       begin failures++; $display("FAIL: no injection back-pressure"); end
    checks++; if (c_ej_stall == 0) begin failures++; $display("FAIL: no ejection stall"); end
    for (int c = 0; c < N_CHANNELS; c++) begin
      checks++;
      if (c_frames[c] == 0 || c_ctd[c] == 0) begin
        failures++; $display("FAIL: channel %0d unused or never contended", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
