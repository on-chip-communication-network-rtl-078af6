// wireless_channel -- behavioural model of one mm-wave wireless channel: the shared
// radio medium together with the zigzag antennas and transceivers of the N_WI wireless
// interfaces tuned to it. This is a behavioural model, not a circuit: the real parts are
// analog (on-off keyed mm-wave transceivers, 16 Gb/s, about 20 mm range).
//
// Every WI hears every other WI of its channel in the same cycle, so the medium is
// modelled as a broadcast: each line seen by the WIs is the OR of what all of them send
// (a WI that sends nothing drives zeros, i.e. "off"). A frame is carried as one parallel
// word held for the whole data period, standing for its serial bit stream. Two WIs
// sending data at once would be a collision; the MAC protocol prevents it, and an
// assertion checks that it never happens. Propagation delay is taken as zero cycles.
//
// Interface: per-WI drive arrays in, broadcast lines out. count of frames sent is kept
// for observation (frames_sent).
module wireless_channel
  import wihet_pkg::*;
#(
  parameter int N_WI = 6
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      drv_start [N_WI],
  input  logic      drv_req   [N_WI],
  input  logic      drv_dv    [N_WI],
  input  wl_frame_t drv_frame [N_WI],
  input  logic      drv_ack   [N_WI],
  output logic      med_start,
  output logic      med_req,
  output logic      med_dv,
  output wl_frame_t med_frame,
  output logic      med_ack,
  output logic [31:0] frames_sent
);

  int n_dv;

  always_comb begin
    med_start = 1'b0;
    med_req   = 1'b0;
    med_dv    = 1'b0;
    med_ack   = 1'b0;
    med_frame = '0;
    n_dv      = 0;
    for (int w = 0; w < N_WI; w++) begin
      med_start = med_start | drv_start[w];
      med_req   = med_req   | drv_req[w];
      med_dv    = med_dv    | drv_dv[w];
      med_ack   = med_ack   | drv_ack[w];
      med_frame = med_frame | drv_frame[w];
      n_dv      = n_dv + int'(drv_dv[w]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frames_sent <= '0;
    else if (med_ack) frames_sent <= frames_sent + 1;
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) n_dv <= 1)
    else $error("wireless_channel: collision, %0d senders", n_dv);

endmodule
