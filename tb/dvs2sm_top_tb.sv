// dvs2sm_top_tb: end-to-end test of the whole circuit at its default size
// (64x64, Nev = 2048 after reset, 22 NORM lanes).
//
// A behavioural DVS sends events over the four-phase AER handshake as fast
// as the circuit acknowledges them; a behavioural accelerator input takes
// words with random ZSien and, for the first frame, holds ZSien low for a
// long time, as when the accelerator is still busy with the previous frame.
// Every acknowledged event is recorded; each group of Nev events is one
// frame, and its expected output (map words and reference NORM values from
// the reference statistics) is queued in order and compared word by word.
// Three rectified frames run with Nev = 2048, then the testbench writes the
// CFG registers (signed histograms, Nev = 1000) and two more frames run.
// Counted and required at least once: bank swaps, DVS stalls (no free bank),
// ZSien back-pressure, results clipped to 1 and to 0, both polarity modes.
module dvs2sm_top_tb;
  import dvs2sm_pkg::*;
  import dvs2sm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [AER_W-1:0] aer_data = '0;
  logic aer_req_n = 1, aer_ack_n;
  logic [31:0] cfg_data = '0;
  logic [3:0] cfg_addr = '0;
  logic cfg_valid = 0;
  logic [PIX_W-1:0] ZSidata;
  logic ZSitype, ZSivalid, ZSien = 0;
  logic [ADDR_W-1:0] ZSiaddr;
  logic busy, dvs_stall, frame_done;
  logic signed [FX_W-1:0] frame_mean, frame_sigma;

  int checks = 0, failures = 0;
  typedef struct { logic [15:0] d; logic t; int a; } word_t;
  word_t exp_q[$];
  int exp_sigma[$];
  int hist[NPIX];
  int nev_cur = 2048, ev_in_frame = 0, frames_in = 0, frames_out = 0, nwords = 0;
  bit rect_cur = 1;
  int n_stall = 0, n_bp = 0, n_clip1 = 0, n_clip0 = 0, n_rect = 0, n_signed = 0, n_swap = 0;
  int hold_until = 0, cyc = 0;

  dvs2sm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: frames in %0d out %0d", frames_in, frames_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- expected output of one frame ----
  task automatic close_frame();
    int m, sg;
    longint unsigned v;
    logic [15:0] msk;
    ref_stats(hist, 1'b1, m, v, sg);
    exp_sigma.push_back(sg);
    for (int g = 0; g < NSMW; g++) begin
      for (int b = 0; b < 16; b++) msk[b] = (hist[g*16+b] != 0);
      exp_q.push_back('{msk, 1'b1, g*16});
      for (int b = 0; b < 16; b++) if (msk[b]) begin
        automatic int r = ref_norm(sg, hist[g*16+b], rect_cur);
        exp_q.push_back('{16'(r), 1'b0, g*16+b});
        if (r == 255*256) n_clip1++;
        if (r == 0) n_clip0++;
      end
    end
    if (rect_cur) n_rect++; else n_signed++;
    hist = '{default: 0};
    frames_in++;
  endtask

  // ---- DVS sender: one event ----
  task automatic send(input int x, input int y, input bit pol);
    aer_event_t e;
    e.x = X_W'(x); e.y = Y_W'(y); e.pol = pol;
    while (!aer_ack_n) @(negedge clk);
    aer_data = AER_W'(e);
    @(negedge clk); aer_req_n = 0;
    while (aer_ack_n) @(negedge clk);
    aer_req_n = 1;
    if (rect_cur || pol) hist[y*64 + x]++; else hist[y*64 + x]--;
    ev_in_frame++;
    if (ev_in_frame == nev_cur) begin
      ev_in_frame = 0;
      close_frame();
    end
  endtask

  // a hand-like blob moving across the field
  task automatic send_frames(input int n, input int offs);
    for (int k = 0; k < n * nev_cur; k++) begin
      automatic int cx = 12 + ((k / 300 + offs) % 30);
      automatic int x = cx + $urandom_range(0, 8) + $urandom_range(0, 8);
      automatic int y = 14 + $urandom_range(0, 12) + $urandom_range(0, 12);
      automatic bit pol = 1'($urandom);
      if (rect_cur && $urandom_range(0, 9) == 0) begin x = 5; y = 5; end   // a hot pixel
      if (!rect_cur) begin
        // signed frames: OFF events piled on a few pixels, ON events spread
        if ($urandom_range(0, 9) < 7) begin x = 40 + $urandom_range(0, 1); y = 40; pol = 0; end
        else pol = 1;
      end
      send(x, y, pol);
    end
  endtask

  // ---- accelerator input ----
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ZSivalid && ZSien) begin
      if (exp_q.size() == 0) begin failures++; $display("ERR unexpected word"); end
      else begin
        automatic word_t w = exp_q.pop_front();
        checks++;
        if (ZSidata != w.d || ZSitype != w.t || ZSiaddr != ADDR_W'(w.a)) begin
          failures++;
          if (failures < 10) $display("ERR frame %0d word %0d: %h/%0d/%0d exp %h/%0d/%0d",
                                      frames_out, nwords, ZSidata, ZSitype, ZSiaddr, w.d, w.t, w.a);
        end
      end
      nwords++;
    end
    if (rst_n && ZSivalid && !ZSien) n_bp++;
    if (dvs_stall) n_stall++;
    if (frame_done) begin
      automatic int sg = exp_sigma.pop_front();
      checks++;
      if (frame_sigma != 24'(sg)) begin failures++; $display("ERR sigma %0d exp %0d", frame_sigma, sg); end
      frames_out++;
      n_swap++;
      nwords = 0;
    end
  end
  always @(negedge clk) ZSien = (cyc < hold_until) ? 1'b0 : 1'($urandom_range(0, 3) != 0);

  task automatic cfg_write(input int a, input int d);
    @(negedge clk); cfg_addr = 4'(a); cfg_data = 32'(d); cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    hist = '{default: 0};
    hold_until = 40000;             // accelerator busy at first: frames must wait
    repeat (3) @(negedge clk); rst_n = 1;
    send_frames(3, 0);
    while (frames_out < frames_in) @(negedge clk);
    // switch mode and frame size
    rect_cur = 0; nev_cur = 1000;
    cfg_write(1, 0);
    cfg_write(0, 1000);
    send_frames(2, 5);
    while (frames_out < frames_in) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 8;
    if (exp_q.size() != 0) begin failures++; $display("ERR %0d words never sent", exp_q.size()); end
    if (n_swap < 2)   begin failures++; $display("no bank swap"); end
    if (n_stall == 0) begin failures++; $display("DVS never stalled"); end
    if (n_bp == 0)    begin failures++; $display("no back-pressure"); end
    if (n_clip1 == 0) begin failures++; $display("no result clipped to 1"); end
    if (n_clip0 == 0) begin failures++; $display("no result clipped to 0"); end
    if (n_rect == 0 || n_signed == 0) begin failures++; $display("a polarity mode never ran"); end
    if (frames_out != 5) begin failures++; $display("frames out %0d", frames_out); end
    $display("frames=%0d swaps=%0d stall_clocks=%0d backpressure_clocks=%0d clip1=%0d clip0=%0d rectified=%0d signed=%0d clocks=%0d",
             frames_out, n_swap, n_stall, n_bp, n_clip1, n_clip0, n_rect, n_signed, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
