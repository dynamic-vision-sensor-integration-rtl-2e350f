// sm_stm_tb: a hist_bank holds random sparsity-map words; the testbench
// plays the list of non-zero pixels (with random gaps) and a receiver with
// random ZSien. The output must be, for every group of 16 pixels, its map
// word followed by the values of its set bits, with the documented ZSitype
// and ZSiaddr; nothing may move while ZSien is low; the SMarray must be zero
// afterwards.
module sm_stm_tb;
  import dvs2sm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  list_item_t item;
  logic item_valid = 0, item_ready;
  bank_req_t breq, tb_req, bank_req;
  bank_rsp_t brsp;
  logic [PIX_W-1:0] ZSidata;
  logic ZSitype, ZSivalid, ZSien = 0, done;
  logic [ADDR_W-1:0] ZSiaddr;
  logic tb_own = 1;
  int checks = 0, failures = 0;
  logic [15:0] mask[NSMW];
  logic [15:0] vals[NPIX];
  typedef struct { logic [15:0] d; logic t; int a; } word_t;
  word_t exp_q[$];
  int items[$];
  int nwords = 0, bp = 0, ndone = 0;

  sm_stm dut (.*);
  assign bank_req = tb_own ? tb_req : breq;
  hist_bank u_bank (.clk, .req(bank_req), .rsp(brsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  always @(posedge clk) if (rst_n) begin
    if (ZSivalid && ZSien) begin
      automatic word_t w = exp_q.pop_front();
      checks++;
      if (ZSidata != w.d || ZSitype != w.t || ZSiaddr != ADDR_W'(w.a)) begin
        failures++; $display("ERR word %0d: %h/%0d/%0d exp %h/%0d/%0d", nwords, ZSidata, ZSitype, ZSiaddr, w.d, w.t, w.a);
      end
      nwords++;
    end
    if (done) ndone++;
  end
  always @(negedge clk) begin
    ZSien = 1'($urandom);
    if (ZSivalid && !ZSien) bp++;
  end

  // list source
  always @(posedge clk) if (rst_n && item_valid && item_ready) void'(items.pop_front());
  always @(negedge clk) begin
    item_valid = (items.size() > 0) && 1'($urandom_range(0, 3) != 0);
    if (items.size() > 0) begin
      item.y = Y_W'(items[0] >> X_W); item.x = X_W'(items[0]); item.value = vals[items[0]];
    end
  end

  initial begin
    tb_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int g = 0; g < NSMW; g++) begin
      @(negedge clk);
      mask[g] = ($urandom_range(0, 3) == 0) ? 16'h0 : 16'($urandom & $urandom);
      tb_req = '0; tb_req.sm_we = 1; tb_req.sm_waddr = SMA_W'(g); tb_req.sm_wdata = mask[g];
      exp_q.push_back('{mask[g], 1'b1, g * 16});
      for (int b = 0; b < 16; b++) if (mask[g][b]) begin
        vals[g*16+b] = 16'($urandom);
        exp_q.push_back('{vals[g*16+b], 1'b0, g*16+b});
        items.push_back(g*16+b);
      end
    end
    @(negedge clk); tb_req = '0; tb_own = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (ndone == 0) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 3;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    if (bp == 0) failures++;
    if (ndone != 1) failures++;
    tb_own = 1;
    for (int g = 0; g < NSMW; g++) begin
      @(negedge clk); tb_req = '0; tb_req.sm_raddr2 = SMA_W'(g);
      @(negedge clk);
      checks++;
      if (brsp.sm_rdata2 != 0) begin failures++; $display("SM word %0d not cleared", g); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
