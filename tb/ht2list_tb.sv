// ht2list_tb: a hist_bank is loaded with random values and an independent
// random mask; the list must hold exactly the masked pixels, in address
// order, with their values, under random back-pressure; DVSmem must be zero
// afterwards; and with no back-pressure the scan must run at one pixel per
// clock.
module ht2list_tb;
  import dvs2sm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  bank_req_t breq, tb_req, bank_req;
  bank_rsp_t brsp;
  list_item_t item;
  logic item_valid, item_ready = 0, done;
  logic tb_own = 1;
  int checks = 0, failures = 0;
  logic [15:0] vals[NPIX];
  logic [15:0] mask[NSMW];
  int exp_q[$];
  int nitems = 0, bp = 0;
  bit random_ready = 1;

  ht2list dut (.*);
  assign bank_req = tb_own ? tb_req : breq;
  hist_bank u_bank (.clk, .req(bank_req), .rsp(brsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && item_valid && item_ready) begin
    automatic int a = exp_q.pop_front();
    checks++;
    if ({item.y, item.x} != ADDR_W'(a) || item.value != vals[a]) begin
      failures++; $display("ERR item %0d: %0d=%h exp %0d=%h", nitems, {item.y, item.x}, item.value, a, vals[a]);
    end
    nitems++;
  end
  always @(negedge clk) begin
    item_ready = random_ready ? 1'($urandom) : 1'b1;
    if (item_valid && !item_ready) bp++;
  end

  task automatic load();
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      vals[i] = 16'($urandom);
      tb_req = '0; tb_req.dvs_we = 1; tb_req.dvs_waddr = ADDR_W'(i); tb_req.dvs_wdata = vals[i];
      if (i < NSMW) begin
        mask[i] = ($urandom_range(0, 3) == 0) ? 16'h0 : 16'($urandom & $urandom);
        tb_req.sm_we = 1; tb_req.sm_waddr = SMA_W'(i); tb_req.sm_wdata = mask[i];
      end
    end
    @(negedge clk); tb_req = '0;
    for (int i = 0; i < NPIX; i++) if (mask[i >> 4][i % 16]) exp_q.push_back(i);
  endtask

  task automatic run();
    int t = 0, n_exp = exp_q.size();
    nitems = 0;
    tb_own = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); t++; end
    checks++;
    if (!random_ready && t > NPIX + 3) begin failures++; $display("scan took %0d clocks", t); end
    repeat (20) @(negedge clk);
    checks++;
    if (nitems != n_exp) begin failures++; $display("ERR %0d items, exp %0d", nitems, n_exp); end
    tb_own = 1;
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk); tb_req = '0; tb_req.dvs_raddr = ADDR_W'(i);
      @(negedge clk);
      checks++;
      if (brsp.dvs_rdata != 0) begin failures++; $display("pixel %0d not cleared", i); end
    end
  endtask

  initial begin
    tb_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    load(); run();
    random_ready = 0;
    load(); run();
    checks++; if (bp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
