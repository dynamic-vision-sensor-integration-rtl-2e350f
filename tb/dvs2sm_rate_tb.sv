// dvs2sm_rate_tb: the Roshambo operating point, timed. The whole circuit at
// its default size (64x64 histograms of 2048 events, 22 NORM lanes) is fed by
// a DVS that answers every handshake edge at once, i.e. at the highest event
// rate the receiver allows, and drains into an accelerator input that never
// holds ZSien low. Six frames of a moving hand-like blob are sent.
//
// Measured and checked:
//   * event period: clocks from one REQ assertion to the next, for events
//     that did not wait on a full bank. Must stay within 8 clocks (133 ns at
//     the 60 MHz clock of the published experiments; the sensor's peak rate is
//     quoted as 100 ns per event).
//   * frame time: clocks from `busy` rising to `frame_done`, i.e. DIV, VAR,
//     DIV, SQRT, NORM and the list/sparsity-map transmission of one frame.
//     Must be below 24540 clocks, the 409 us per frame of the published
//     pipeline at 60 MHz.
//   * with both limits met, processing a frame (about 12.5K clocks) is faster
//     than collecting the next 2048 events at peak rate (about 15K clocks),
//     so the DVS must never be stalled: the circuit runs in real time at the
//     sensor's full rate. (The published HLS pipeline is slower than the
//     sensor and stalls it; dvs2sm_top_tb provokes stalls with a busy
//     accelerator.) Every frame must come out complete: one map word per 16
//     pixels plus one value per non-zero pixel.
// The first event waits for the 4096-clock clear pass after reset; its
// period is not counted.
// The values themselves are checked by dvs2sm_top_tb.
module dvs2sm_rate_tb;
  import dvs2sm_pkg::*;
  localparam int NFRAMES        = 6;
  localparam int NEV            = 2048;
  localparam int MAX_EV_PERIOD  = 8;
  localparam int MAX_FRAME_CLKS = 24540;   // 409 us x 60 MHz

  logic clk = 0, rst_n = 0;
  logic [AER_W-1:0] aer_data = '0;
  logic aer_req_n = 1, aer_ack_n;
  logic [31:0] cfg_data = '0;
  logic [3:0] cfg_addr = '0;
  logic cfg_valid = 0;
  logic [PIX_W-1:0] ZSidata;
  logic ZSitype, ZSivalid, ZSien = 1;
  logic [ADDR_W-1:0] ZSiaddr;
  logic busy, dvs_stall, frame_done;
  logic signed [FX_W-1:0] frame_mean, frame_sigma;

  int checks = 0, failures = 0;
  int hist[NPIX];
  int exp_words[$];
  int cyc = 0, last_req = 0, n_ev = 0, ev_period_max = 0, ev_period_sum = 0, n_period = 0;
  int frames_in = 0, frames_out = 0, words = 0, busy_start = 0, frame_max = 0, n_stall = 0;
  bit stalled_since_req = 0, busy_q = 0;

  dvs2sm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog: frames in %0d out %0d", frames_in, frames_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected word count of a finished frame: 256 map words + non-zero pixels
  task automatic close_frame();
    int nz = 0;
    for (int i = 0; i < NPIX; i++) if (hist[i] != 0) nz++;
    exp_words.push_back(NSMW + nz);
    hist = '{default: 0};
    frames_in++;
  endtask

  task automatic send(input int x, input int y);
    aer_event_t e;
    e.x = X_W'(x); e.y = Y_W'(y); e.pol = 1'($urandom);
    aer_data = AER_W'(e);
    aer_req_n = 0;
    if (n_ev >= 2 && !stalled_since_req) begin
      ev_period_sum += cyc - last_req;
      n_period++;
      if (cyc - last_req > ev_period_max) ev_period_max = cyc - last_req;
    end
    last_req = cyc;
    stalled_since_req = 0;
    while (aer_ack_n) @(negedge clk);
    aer_req_n = 1;
    while (!aer_ack_n) @(negedge clk);
    hist[y*64 + x]++;
    n_ev++;
    if (n_ev % NEV == 0) close_frame();
  endtask

  always @(posedge clk) begin
    cyc++;
    if (dvs_stall) begin n_stall++; stalled_since_req = 1; end
    busy_q <= busy;
    if (busy && !busy_q) busy_start = cyc;
    if (rst_n && ZSivalid && ZSien) words++;
    if (frame_done) begin
      automatic int t = cyc - busy_start;
      automatic int w = exp_words.pop_front();
      checks += 2;
      if (words != w) begin failures++; $display("ERR frame %0d: %0d words, expected %0d", frames_out, words, w); end
      if (t >= MAX_FRAME_CLKS) begin failures++; $display("ERR frame %0d took %0d clocks", frames_out, t); end
      if (t > frame_max) frame_max = t;
      $display("frame %0d: %0d clocks (%0d us at 60 MHz), %0d words", frames_out, t, t / 60, words);
      words = 0;
      frames_out++;
    end
  end

  initial begin
    hist = '{default: 0};
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NFRAMES * NEV; k++) begin
      automatic int cx = 10 + ((k / 256) % 32);
      send(cx + $urandom_range(0, 7) + $urandom_range(0, 7), 12 + $urandom_range(0, 12) + $urandom_range(0, 12));
    end
    while (frames_out < frames_in) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 4;
    if (frames_out != NFRAMES) begin failures++; $display("ERR %0d frames out", frames_out); end
    if (n_period == 0 || ev_period_max > MAX_EV_PERIOD) begin
      failures++; $display("ERR event period up to %0d clocks", ev_period_max);
    end
    if (n_stall != 0) begin failures++; $display("ERR DVS stalled for %0d clocks at peak rate", n_stall); end
    if (exp_words.size() != 0) begin failures++; $display("ERR %0d frames never sent", exp_words.size()); end
    $display("events=%0d period_max=%0d period_avg_x100=%0d frame_max=%0d stall_clocks=%0d clocks=%0d",
             n_ev, ev_period_max, (100 * ev_period_sum) / (n_period > 0 ? n_period : 1), frame_max, n_stall, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
