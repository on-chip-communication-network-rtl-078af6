// wi_mac -- distributed medium access control of one wireless interface (WI).
//
// All WIs that share a frequency channel run an identical copy of this controller, kept
// in lock-step because every copy sees the same medium. A WI that holds a frame first
// checks the medium: when the medium is free it raises the start line, and then every
// WI on the channel enters a request period of N_WI slots, one clock cycle per slot, slot
// s belonging to the WI with MY_SLOT == s. A WI that wants the channel sends a 1 in its
// own slot and listens in the others, so after the period every copy holds the same
// request vector (b[N_WI-1] ... b0). All copies then run the same fairness-based
// selection, a round-robin search that starts after the previous winner, and so agree on
// one winner without any central arbiter. The winner sends its frame for TX_CYCLES
// cycles (the serialisation time of a frame at the channel data rate); in the last of
// those cycles the addressed WI acknowledges if it can store the frame. Without an
// acknowledgement the winner keeps the frame and asks again.
//
// From the design: medium sensing, the request period with one slot per WI, on/off
// signalling in the slot and a common fairness-based selection. Own choices: the start
// line that opens a request period, round-robin as the fairness rule, one frame per
// grant, and the acknowledgement.
//
// Timing: start seen in cycle t -> slots in t+1 .. t+N_WI -> data in the next TX_CYCLES
// cycles -> medium free again. Outputs drv_* are what this WI puts on the medium.
module wi_mac #(
  parameter int N_WI      = 6,
  parameter int MY_SLOT   = 0,
  parameter int TX_CYCLES = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic has_frame,    // transmit queue not empty
  input  logic med_start,    // OR of all start lines
  input  logic med_req,      // OR of all request-slot bits
  input  logic med_ack,      // OR of all acknowledgements
  output logic drv_start,
  output logic drv_req,
  output logic drv_data,     // this WI owns the channel and sends its frame
  output logic data_last,    // last cycle of a data period (receivers sample the frame)
  output logic tx_done,      // our frame was acknowledged: drop it from the queue
  output logic contended     // pulse: a request period saw more than one request
);

  localparam int SW = (N_WI > 1) ? $clog2(N_WI) : 1;
  localparam int CW = $clog2(TX_CYCLES + 1);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_e;

  state_e          state;
  logic [SW-1:0]   slot;
  logic [N_WI-1:0] req_vec;
  logic [SW-1:0]   winner, last_winner;
  logic [CW-1:0]   cnt;

  // request vector including the bit heard in the current (last) slot
  logic [N_WI-1:0] req_now;
  logic [SW-1:0]   pick;
  logic            pick_any;

  always_comb begin
    int idx;
    req_now = req_vec;
    req_now[slot] = med_req;
    pick     = '0;
    pick_any = 1'b0;
    for (int k = 1; k <= N_WI; k++) begin
      idx = (int'(last_winner) + k) % N_WI;
      if (req_now[idx] && !pick_any) begin
        pick     = SW'(idx);
        pick_any = 1'b1;
      end
    end
  end

  assign drv_start = (state == S_IDLE) && has_frame;
  assign drv_req   = (state == S_REQ) && has_frame && (int'(slot) == MY_SLOT);
  assign drv_data  = (state == S_DATA) && (int'(winner) == MY_SLOT);
  assign data_last = (state == S_DATA) && (int'(cnt) == TX_CYCLES - 1);
  assign tx_done   = drv_data && data_last && med_ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      slot        <= '0;
      req_vec     <= '0;
      winner      <= '0;
      last_winner <= SW'(N_WI - 1);
      cnt         <= '0;
      contended   <= 1'b0;
    end else begin
      contended <= 1'b0;
      case (state)
        S_IDLE: begin
          if (med_start) begin
            state   <= S_REQ;
            slot    <= '0;
            req_vec <= '0;
          end
        end
        S_REQ: begin
          req_vec[slot] <= med_req;
          if (int'(slot) == N_WI - 1) begin
            if (pick_any) begin
              state       <= S_DATA;
              winner      <= pick;
              last_winner <= pick;
              cnt         <= '0;
              contended   <= (req_now & (req_now - 1'b1)) != '0;
            end else begin
              state <= S_IDLE;
            end
          end else begin
            slot <= slot + 1'b1;
          end
        end
        S_DATA: begin
          if (int'(cnt) == TX_CYCLES - 1) state <= S_IDLE;
          else                            cnt   <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
