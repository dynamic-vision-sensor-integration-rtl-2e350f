// frame_proc_tb: one hist_bank is loaded with a histogram, the engine is
// started with its S and c, and the output stream is compared word by word
// with a model built from the formulas: the map words, and for every
// non-zero pixel the reference NORM result for the reference sigma. Frames:
// rectified 2K events, signed 2K events, a frame with a single busy pixel
// (sigma 0) and an empty frame. The bank must be empty afterwards; the
// clock count of a frame with ZSien always high is checked against the
// stage latencies.
module frame_proc_tb;
  import dvs2sm_pkg::*;
  import dvs2sm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, rectify;
  logic signed [SUM_W-1:0] sum_s;
  logic [CNT_W-1:0] cnt_c;
  bank_req_t breq, tb_req, bank_req;
  bank_rsp_t brsp;
  logic [PIX_W-1:0] ZSidata;
  logic ZSitype, ZSivalid, ZSien = 0, busy, done;
  logic [ADDR_W-1:0] ZSiaddr;
  logic signed [FX_W-1:0] mean, sigma;
  logic tb_own = 1;
  bit always_en = 0;
  int checks = 0, failures = 0;
  typedef struct { logic [15:0] d; logic t; int a; } word_t;
  word_t exp_q[$];
  int nwords = 0;

  frame_proc dut (.*);
  assign bank_req = tb_own ? tb_req : breq;
  hist_bank u_bank (.clk, .req(bank_req), .rsp(brsp));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ZSivalid && ZSien) begin
    automatic word_t w = exp_q.pop_front();
    checks++;
    if (ZSidata != w.d || ZSitype != w.t || ZSiaddr != ADDR_W'(w.a)) begin
      failures++; $display("ERR word %0d: %h/%0d/%0d exp %h/%0d/%0d", nwords, ZSidata, ZSitype, ZSiaddr, w.d, w.t, w.a);
    end
    nwords++;
  end
  always @(negedge clk) ZSien = always_en ? 1'b1 : 1'($urandom);

  task automatic frame(input int h[NPIX], input bit rect, input int max_clocks);
    int m, sg, c = 0, t = 0;
    longint s = 0;
    longint unsigned v;
    logic [15:0] msk;
    ref_stats(h, 1'b1, m, v, sg);
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      tb_req = '0; tb_req.dvs_we = 1; tb_req.dvs_waddr = ADDR_W'(i); tb_req.dvs_wdata = 16'(h[i]);
      s += longint'(h[i]); if (h[i] != 0) c++;
      if (i % 16 == 15) begin
        for (int b = 0; b < 16; b++) msk[b] = (h[i-15+b] != 0);
        tb_req.sm_we = 1; tb_req.sm_waddr = SMA_W'(i >> 4); tb_req.sm_wdata = msk;
        exp_q.push_back('{msk, 1'b1, i - 15});
        for (int b = 0; b < 16; b++) if (msk[b])
          exp_q.push_back('{16'(ref_norm(sg, h[i-15+b], rect)), 1'b0, i-15+b});
      end
    end
    @(negedge clk); tb_req = '0; tb_own = 0;
    sum_s = 32'(s); cnt_c = 13'(c); rectify = rect; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); t++; end
    checks += 4;
    if (mean != 24'(m)) begin failures++; $display("ERR mean %0d exp %0d", mean, m); end
    if (sigma != 24'(sg)) begin failures++; $display("ERR sigma %0d exp %0d", sigma, sg); end
    if (exp_q.size() != 0) begin failures++; $display("ERR %0d words missing", exp_q.size()); end
    if (max_clocks > 0 && t > max_clocks) begin failures++; $display("frame took %0d clocks", t); end
    $display("frame: c=%0d mean=%0d sigma=%0d clocks=%0d", c, mean, sigma, t);
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk); tb_req = '0; tb_req.dvs_raddr = ADDR_W'(i); tb_req.sm_raddr1 = SMA_W'(i >> 4);
      @(negedge clk);
      checks++;
      if (brsp.dvs_rdata != 0 || brsp.sm_rdata1 != 0) begin failures++; $display("bank not cleared at %0d", i); break; end
    end
  endtask

  initial begin
    int h[NPIX];
    tb_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // rectified, 2048 events over a blob, ZSien always high
    h = '{default: 0};
    for (int e = 0; e < 2048; e++) begin
      automatic int x = 20 + $urandom_range(0, 15) + $urandom_range(0, 10);
      automatic int y = 16 + $urandom_range(0, 20) + $urandom_range(0, 10);
      h[y*64 + x]++;
    end
    always_en = 1;
    // DIV 40 + VAR 4096+2+64 + SQRT 32 + NORM 4096+11 + stream (4096 + 3*256 + values)
    frame(h, 1'b1, 40 + 4162 + 32 + 4107 + 4096 + 3*256 + 2048 + 40);
    always_en = 0;
    // signed
    h = '{default: 0};
    for (int e = 0; e < 2048; e++) begin
      automatic int x = $urandom_range(10, 50);
      automatic int y = $urandom_range(10, 30);
      h[y*64 + x] += (x > 30) ? 1 : -1;
    end
    frame(h, 1'b0, 0);
    // one pixel: sigma from the zero pixels (equation sums over all pixels)
    h = '{default: 0}; h[1000] = 2048;
    frame(h, 1'b1, 0);
    // empty
    h = '{default: 0};
    frame(h, 1'b1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
