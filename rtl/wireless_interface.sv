// wireless_interface -- digital part of a wireless interface (WI): the wireless port of
// a router.
//
// Frames from the router (a flit plus the tile of the receiving WI) wait in a transmit
// queue. The distributed MAC (wi_mac) wins the channel for the head frame, which is then
// held on the medium for TX_CYCLES cycles, the time one frame takes at the channel data
// rate of 16 Gb/s with a 2.5 GHz NoC clock. Every WI of the channel watches the medium;
// in the last cycle of a data period the WI whose tile matches the frame's target stores
// the flit in its receive queue and acknowledges, and the receive queue feeds the
// router's wireless input port. The antenna and transceiver are outside this module
// (see wireless_channel); the frame crosses the medium as a parallel word that stands
// for the serial bit stream.
//
// tx_ready low (transmit queue full) is the "wireless busy" indication the router uses to
// send a flit over wireline links instead. Queue depths and the acknowledgement are this
// implementation's choices; the MAC scheme and data rate follow the design.
//
// Interface: tx_* valid/ready from the router, rx_* valid/ready to the router, drv_* to
// the shared medium (all zero when idle, so the medium is a wired OR), med_* from it.
module wireless_interface
  import wihet_pkg::*;
#(
  parameter int MY_TILE   = 0,
  parameter int N_WI      = 6,
  parameter int MY_SLOT   = 0,
  parameter int TX_CYC    = TX_CYCLES,
  parameter int TXQ_DEPTH = 2,
  parameter int RXQ_DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // router side
  input  logic      tx_valid,
  input  wl_frame_t tx_frame,
  output logic      tx_ready,
  output logic      rx_valid,
  output flit_t     rx_flit,
  input  logic      rx_ready,
  // medium side
  output logic      drv_start,
  output logic      drv_req,
  output logic      drv_dv,
  output wl_frame_t drv_frame,
  output logic      drv_ack,
  input  logic      med_start,
  input  logic      med_req,
  input  logic      med_dv,
  input  wl_frame_t med_frame,
  input  logic      med_ack,
  // events
  output logic      ev_contended,
  output logic      ev_tx_done
);

  wl_frame_t txq_head;
  logic      txq_empty, txq_full;
  logic      rxq_empty, rxq_full;
  logic      data_last, tx_done;
  logic      rx_take;

  sync_fifo #(.WIDTH(FRAME_W), .DEPTH(TXQ_DEPTH)) u_txq (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (tx_valid),
    .wdata (tx_frame),
    .pop   (tx_done),
    .rdata (txq_head),
    .empty (txq_empty),
    .full  (txq_full)
  );
  assign tx_ready = !txq_full;

  wi_mac #(.N_WI(N_WI), .MY_SLOT(MY_SLOT), .TX_CYCLES(TX_CYC)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .has_frame (!txq_empty),
    .med_start (med_start),
    .med_req   (med_req),
    .med_ack   (med_ack),
    .drv_start (drv_start),
    .drv_req   (drv_req),
    .drv_data  (drv_dv),
    .data_last (data_last),
    .tx_done   (tx_done),
    .contended (ev_contended)
  );

  assign drv_frame = drv_dv ? txq_head : '0;

  // receive: sample the frame at the end of the data period if it is addressed to us
  assign rx_take = data_last && med_dv && (int'(med_frame.tgt) == MY_TILE) && !rxq_full;
  assign drv_ack = rx_take;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(RXQ_DEPTH)) u_rxq (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (rx_take),
    .wdata (med_frame.flit),
    .pop   (rx_ready),
    .rdata (rx_flit),
    .empty (rxq_empty),
    .full  (rxq_full)
  );
  assign rx_valid   = !rxq_empty;
  assign ev_tx_done = tx_done;

endmodule
