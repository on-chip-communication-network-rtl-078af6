// tb_wireless_channel -- self-checking test of the wireless medium model.
//
// Drives random on/off patterns from four WIs, one data sender at a time, and checks
// that every broadcast line equals the OR of what the WIs send, that the frame seen is
// the sender's frame, and that the delivered-frame counter counts acknowledgements.
module tb_wireless_channel;
  import wihet_pkg::*;

  localparam int NW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      d_start [NW], d_req [NW], d_dv [NW], d_ack [NW];
  wl_frame_t d_frame [NW];
  logic      m_start, m_req, m_dv, m_ack;
  wl_frame_t m_frame;
  logic [31:0] sent;

  wireless_channel #(.N_WI(NW)) dut (
    .clk (clk), .rst_n (rst_n),
    .drv_start (d_start), .drv_req (d_req), .drv_dv (d_dv), .drv_frame (d_frame),
    .drv_ack (d_ack),
    .med_start (m_start), .med_req (m_req), .med_dv (m_dv), .med_frame (m_frame),
    .med_ack (m_ack), .frames_sent (sent)
  );

  int checks = 0, failures = 0;
  int acks = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NW; w++) begin
      d_start[w] = 0; d_req[w] = 0; d_dv[w] = 0; d_ack[w] = 0; d_frame[w] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int sender;
      bit es, er, ea;
      @(negedge clk);
      sender = $urandom_range(0, NW);   // NW means nobody sends
      es = 0; er = 0; ea = 0;
      for (int w = 0; w < NW; w++) begin
        d_start[w] = 1'($urandom_range(0, 1));
        d_req[w]   = 1'($urandom_range(0, 1));
        d_ack[w]   = (sender < NW) && (w == (sender + 1) % NW) && 1'($urandom_range(0, 1));
        d_dv[w]    = (w == sender);
        d_frame[w] = (w == sender) ? wl_frame_t'({$urandom, $urandom}) : '0;
        es |= d_start[w]; er |= d_req[w]; ea |= d_ack[w];
      end
      if (ea) acks++;
      #1;
      checks++;
      if (m_start != es || m_req != er || m_ack != ea || m_dv != (sender < NW)) begin
        failures++; $display("FAIL: broadcast lines wrong at step %0d", n);
      end
      checks++;
      if (m_frame != ((sender < NW) ? d_frame[sender] : '0)) begin
        failures++; $display("FAIL: frame wrong at step %0d", n);
      end
    end
    @(posedge clk);
    #1;
    checks++;
    if (int'(sent) != acks) begin
      failures++; $display("FAIL: frames_sent %0d, expected %0d", sent, acks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
