// ev_collector_tb: the collector writes into a real hist_bank. Three runs
// (rectified, signed with pixels returning to zero, and one pixel driven
// into int16 saturation) are checked against a model of the histogram, of
// S, of c and of the SMarray mask; `full` must come after exactly Nev
// events, events must be taken every three clocks when offered back to back,
// and nothing may be taken while `enable` is low.
module ev_collector_tb;
  import dvs2sm_pkg::*;
  logic clk = 0, rst_n = 0;
  aer_event_t ev;
  logic ev_valid = 0, ev_ready;
  logic [NEV_W-1:0] nev;
  logic rectify, enable = 0;
  bank_req_t breq, tb_req, bank_req;
  bank_rsp_t brsp;
  logic full;
  logic signed [SUM_W-1:0] sum_s;
  logic [CNT_W-1:0] cnt_c;
  logic tb_own = 1;
  int checks = 0, failures = 0;
  int model[NPIX];
  logic signed [SUM_W-1:0] s_at_full;
  logic [CNT_W-1:0] c_at_full;
  int n_acc = 0, n_full = 0, t_first = 0, t_last = 0, cyc = 0;

  ev_collector dut (.*);
  assign bank_req = tb_own ? tb_req : breq;
  hist_bank u_bank (.clk, .req(bank_req), .rsp(brsp));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (ev_valid && ev_ready) begin
      if (n_acc == 0) t_first = cyc;
      t_last = cyc;
      n_acc++;
    end
    if (full) begin n_full++; s_at_full = sum_s; c_at_full = cnt_c; end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_bank();
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      tb_req = '0; tb_req.dvs_we = 1; tb_req.dvs_waddr = ADDR_W'(i);
      tb_req.sm_we = (i < NSMW); tb_req.sm_waddr = SMA_W'(i);
      model[i] = 0;
    end
    @(negedge clk); tb_req = '0;
  endtask

  task automatic check_bank(input int n_expected_full);
    longint s = 0; int c = 0; logic [15:0] smw;
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk); tb_req = '0; tb_req.dvs_raddr = ADDR_W'(i); tb_req.sm_raddr1 = SMA_W'(i >> 4);
      @(negedge clk);
      checks++;
      if (signed'(brsp.dvs_rdata) != 16'(model[i]) || brsp.sm_rdata1[i % 16] != (model[i] != 0)) begin
        failures++; $display("ERR pixel %0d: %0d mask %0d exp %0d", i, signed'(brsp.dvs_rdata), brsp.sm_rdata1[i % 16], model[i]);
      end
      s += longint'(model[i]); if (model[i] != 0) c++;
    end
    checks += 2;
    if (s_at_full != 32'(s) || c_at_full != 13'(c)) begin failures++; $display("ERR S=%0d c=%0d exp %0d %0d", s_at_full, c_at_full, s, c); end
    if (n_full != n_expected_full) begin failures++; $display("ERR full count %0d", n_full); end
  endtask

  // Offer n events back to back (gaps when `gaps`), update the model.
  task automatic feed(input int n, input int region, input bit gaps, input int fixed_pix);
    for (int k = 0; k < n; k++) begin
      automatic int a = (fixed_pix >= 0) ? fixed_pix : $urandom_range(0, region - 1);
      automatic bit p = 1'($urandom);
      @(negedge clk);
      while (gaps && $urandom_range(0, 2) == 0) begin ev_valid = 0; @(negedge clk); end
      ev.y = Y_W'(a >> X_W); ev.x = X_W'(a); ev.pol = p; ev_valid = 1;
      @(posedge clk); while (!ev_ready) @(posedge clk);
      if (rectify || p) model[a] = (model[a] >= 32767) ? 32767 : model[a] + 1;
      else              model[a] = (model[a] <= -32768) ? -32768 : model[a] - 1;
    end
    @(negedge clk); ev_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    nev = 500; rectify = 1;
    tb_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    clear_bank();
    // nothing is taken while enable is low
    @(negedge clk); ev = '0; ev_valid = 1; tb_own = 0;
    repeat (20) @(negedge clk);
    checks++; if (n_acc != 0) begin failures++; $display("taken while disabled"); end
    ev_valid = 0; enable = 1;

    // run 1: rectified, back to back, 500 events over 300 pixels
    n_acc = 0; n_full = 0;
    feed(500, 300, 0, -1);
    checks++;
    if (t_last - t_first != 3 * (500 - 1)) begin failures++; $display("rate: %0d clocks for 500 events", t_last - t_first); end
    enable = 0;
    check_bank(1);

    // run 2: signed, 700 events over 40 pixels so that counts go back to 0
    clear_bank(); rectify = 0; nev = 700; n_full = 0; tb_own = 0; enable = 1;
    feed(699, 40, 1, -1);
    checks++; if (n_full != 0) begin failures++; $display("full too early"); end
    feed(1, 40, 1, -1);
    enable = 0;
    check_bank(1);

    // run 3: saturation of one pixel
    clear_bank(); rectify = 1; nev = 33000; n_full = 0; tb_own = 0; enable = 1;
    feed(33000, 1, 0, 77);
    enable = 0;
    check_bank(1);
    checks++; if (model[77] != 32767) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
