// ev_collector: the event-collection state machine.
//
// Every accepted event is added to the histogram of the bank being filled:
// the pixel's count is read, incremented (or, for an OFF event in signed
// mode, decremented), saturated to the int16 range and written back, and the
// pixel's bit in the SMarray word is set when the count is non-zero and
// cleared when it returns to zero. Alongside, the collector keeps the two
// sums the normalisation starts from (Eq. 2 of the paper): S, the sum of all
// pixel values, and c, the number of non-zero pixels. After Nev events it
// pulses `full` for one clock with S and c on sum_s / cnt_c and starts the
// next histogram from zero.
//
// Following the paper: an FSM collects a configured number of events into a
// BRAM histogram and marks non-zero pixels in SMarray. This design's own
// choices: S and c are kept during collection so the division can start at
// once, signed/rectified counting, int16 saturation.
//
// Timing: three clocks per event (accept and read, write, count check).
// Events are accepted only while `enable` is high, i.e. while a free bank
// is attached to the collector.
module ev_collector
  import dvs2sm_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  aer_event_t              ev,
  input  logic                    ev_valid,
  output logic                    ev_ready,
  input  logic [NEV_W-1:0]        nev,
  input  logic                    rectify,
  input  logic                    enable,
  output bank_req_t               breq,
  input  bank_rsp_t               brsp,
  output logic                    full,
  output logic signed [SUM_W-1:0] sum_s,
  output logic [CNT_W-1:0]        cnt_c
);

  typedef enum logic [1:0] {S_IDLE, S_UPD, S_CHK} state_e;
  state_e state;

  aer_event_t        cur;
  logic [NEV_W-1:0]  n_ev;

  logic [ADDR_W-1:0]       acc_addr, cur_addr;
  logic signed [PIX_W:0]   sum_ext;
  logic signed [PIX_W-1:0] old_v, new_v;
  logic [SM_W-1:0]         new_sm;

  assign acc_addr = {ev.y, ev.x};
  assign cur_addr = {cur.y, cur.x};
  assign ev_ready = (state == S_IDLE) && enable && !full;

  // New count, saturated to int16.
  always_comb begin
    old_v   = signed'(brsp.dvs_rdata);
    sum_ext = (PIX_W+1)'(old_v) + ((rectify || cur.pol) ? (PIX_W+1)'(1) : -(PIX_W+1)'(1));
    if (sum_ext > (PIX_W+1)'(signed'(16'sh7fff)))       new_v = 16'sh7fff;
    else if (sum_ext < (PIX_W+1)'(signed'(16'sh8000)))  new_v = 16'sh8000;
    else                                                new_v = sum_ext[PIX_W-1:0];
    new_sm = brsp.sm_rdata1;
    new_sm[cur.x[3:0]] = (new_v != '0);
  end

  always_comb begin
    breq           = BANK_REQ_IDLE;
    breq.dvs_raddr = (state == S_IDLE) ? acc_addr : cur_addr;
    breq.sm_raddr1 = (state == S_IDLE) ? acc_addr[ADDR_W-1:4] : cur_addr[ADDR_W-1:4];
    breq.dvs_waddr = cur_addr;
    breq.sm_waddr  = cur_addr[ADDR_W-1:4];
    breq.dvs_wdata = new_v;
    breq.sm_wdata  = new_sm;
    breq.dvs_we    = (state == S_UPD);
    breq.sm_we     = (state == S_UPD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      n_ev  <= '0;
      sum_s <= '0;
      cnt_c <= '0;
      full  <= 1'b0;
    end else begin
      full <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (full) begin            // previous histogram handed over
            sum_s <= '0;
            cnt_c <= '0;
          end
          if (ev_valid && ev_ready) begin
            cur   <= ev;
            state <= S_UPD;
          end
        end
        S_UPD: begin
          sum_s <= sum_s + SUM_W'(new_v) - SUM_W'(old_v);
          if (old_v == '0 && new_v != '0) cnt_c <= cnt_c + 1'b1;
          if (old_v != '0 && new_v == '0) cnt_c <= cnt_c - 1'b1;
          n_ev  <= n_ev + 1'b1;
          state <= S_CHK;
        end
        S_CHK: begin
          if (n_ev >= nev) begin
            full <= 1'b1;
            n_ev <= '0;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
