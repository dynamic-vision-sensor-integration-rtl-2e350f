// aer_rx: parallel AER receiver for the DVS retina.
//
// The sensor presents an event word on aer_data and pulls aer_req_n low.
// The receiver synchronises REQ with two flip-flops, samples the (by then
// stable) data, and offers the event downstream with a valid/ready
// handshake. Only after the event has been taken does it pull aer_ack_n low;
// it then waits for the sensor to release REQ and releases ACK, which closes
// the four-phase cycle. If downstream cannot take events (both histogram
// banks busy) ACK stays high and the sensor stops sending: this is how the
// circuit throttles the DVS.
//
// The paper shows only the Data/REQ/ACK wires of this interface. Active-low
// REQ/ACK, the four-phase protocol and the 13-bit {y, x, pol} word are this
// design's choices. Timing: an event reaches ev_valid three clocks after REQ
// falls; with a sensor that answers at once a complete cycle takes about
// eight clocks, i.e. 80 ns at 100 MHz, faster than the 100 ns per event the
// paper quotes for the sensor's peak rate.
module aer_rx
  import dvs2sm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AER_W-1:0] aer_data,
  input  logic             aer_req_n,
  output logic             aer_ack_n,
  output aer_event_t       ev,
  output logic             ev_valid,
  input  logic             ev_ready
);

  typedef enum logic [1:0] {S_IDLE, S_OFFER, S_ACK} state_e;
  state_e state;

  logic req_meta, req_sync;   // active-high, synchronised

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_meta <= 1'b0;
      req_sync <= 1'b0;
    end else begin
      req_meta <= ~aer_req_n;
      req_sync <= req_meta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      aer_ack_n <= 1'b1;
      ev        <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_sync) begin
          ev    <= aer_event_t'(aer_data);
          state <= S_OFFER;
        end
        S_OFFER: if (ev_ready) begin
          aer_ack_n <= 1'b0;
          state     <= S_ACK;
        end
        S_ACK: if (!req_sync) begin
          aer_ack_n <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ev_valid = (state == S_OFFER);

  // The event must stay put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           ev_valid && !ev_ready |=> ev_valid && $stable(ev));

endmodule
