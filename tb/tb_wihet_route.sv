// tb_wihet_route -- self-checking test of the routing function.
//
// Three router positions are checked against every destination tile, with the wireless
// port both free and busy: a GPU tile holding a WI of channel 1 (tile 17), a CPU tile on
// the CPU-MC channel (tile 27) and a tile without a WI (tile 9). The expected port is
// worked out here from grid coordinates: local when the destination is the tile itself;
// wireless when some other WI of the tile's channel brings the flit strictly nearer
// (one wireless hop plus the grid distance from that WI) and the port is free; otherwise
// X-first then Y. For a wireless choice the chosen receiving WI must give the shortest
// such distance.
module tb_wihet_route;
  import wihet_pkg::*;

  localparam int NT = 3;
  localparam int TILES [NT] = '{17, 27, 9};

  int checks = 0, failures = 0;
  int n_wireless = 0, n_fallback = 0;

  tile_t             dst;
  logic              wl_ok;
  logic [PORT_W-1:0] port  [NT];
  tile_t             tgt   [NT];
  logic              pref  [NT];

  for (genvar k = 0; k < NT; k++) begin : g_dut
    wihet_route #(.MY_TILE(TILES[k])) dut (
      .dst (dst), .wl_ok (wl_ok), .port (port[k]), .wl_tgt (tgt[k]), .wl_pref (pref[k])
    );
  end

  function automatic int absi(input int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic int gdist(input int a, input int b);
    return absi(a % 8 - b % 8) + absi(a / 8 - b / 8);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NT; k++) begin
      for (int d = 0; d < 64; d++) begin
        for (int ok = 0; ok < 2; ok++) begin
          int me, ch, best, exp_port;
          bit has_wl;
          me = TILES[k];
          ch = wi_channel(me);
          dst   = tile_t'(d);
          wl_ok = ok[0];
          #1;
          best = gdist(me, d);
          has_wl = 0;
          if (ch >= 0)
            for (int u = 0; u < 64; u++)
              if (u != me && wi_channel(u) == ch && 1 + gdist(u, d) < best) begin
                best = 1 + gdist(u, d);
                has_wl = 1;
              end
          if (d == me)                    exp_port = 0;
          else if (has_wl && ok == 1)     exp_port = 5;
          else if (d % 8 > me % 8)        exp_port = 2;
          else if (d % 8 < me % 8)        exp_port = 4;
          else if (d / 8 > me / 8)        exp_port = 3;
          else                            exp_port = 1;
          checks++;
          if (int'(port[k]) != exp_port) begin
            failures++;
            $display("FAIL tile %0d dst %0d ok %0d: port %0d expected %0d", me, d, ok, port[k], exp_port);
          end
          if (exp_port == 5) begin
            n_wireless++;
            checks++;
            if (1 + gdist(int'(tgt[k]), d) != best || wi_channel(int'(tgt[k])) != ch) begin
              failures++;
              $display("FAIL tile %0d dst %0d: wireless target %0d", me, d, tgt[k]);
            end
          end
          if (has_wl && ok == 0 && d != me) n_fallback++;
        end
      end
    end
    checks++;
    if (n_wireless == 0 || n_fallback == 0) begin
      failures++;
      $display("FAIL: wireless %0d fallback %0d cases never seen", n_wireless, n_fallback);
    end
    $display("wireless choices %0d, busy fallbacks %0d", n_wireless, n_fallback);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
