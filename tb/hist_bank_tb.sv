// hist_bank_tb: random reads and writes on all ports against an array
// model, including the one-clock read latency and read-during-write
// returning the old contents.
module hist_bank_tb;
  import dvs2sm_pkg::*;
  logic clk = 0;
  bank_req_t req;
  bank_rsp_t rsp;
  logic [15:0] dm [NPIX];
  logic [15:0] sm [NSMW];
  int checks = 0, failures = 0;

  hist_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] e_d, e_s1, e_s2;
    req = '0;
    // fill both memories
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      req = '0;
      req.dvs_we = 1; req.dvs_waddr = 12'(i); req.dvs_wdata = 16'($urandom); dm[i] = req.dvs_wdata;
      if (i < NSMW) begin req.sm_we = 1; req.sm_waddr = 8'(i); req.sm_wdata = 16'($urandom); sm[i] = req.sm_wdata; end
    end
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      req.dvs_raddr = 12'($urandom); req.sm_raddr1 = 8'($urandom); req.sm_raddr2 = 8'($urandom);
      req.dvs_we = 1'($urandom); req.sm_we = 1'($urandom);
      if ($urandom_range(0, 3) == 0) req.dvs_waddr = req.dvs_raddr; else req.dvs_waddr = 12'($urandom);
      if ($urandom_range(0, 3) == 0) req.sm_waddr = req.sm_raddr1; else req.sm_waddr = 8'($urandom);
      req.dvs_wdata = 16'($urandom); req.sm_wdata = 16'($urandom);
      e_d = dm[req.dvs_raddr]; e_s1 = sm[req.sm_raddr1]; e_s2 = sm[req.sm_raddr2];
      @(posedge clk);
      if (req.dvs_we) dm[req.dvs_waddr] = req.dvs_wdata;
      if (req.sm_we) sm[req.sm_waddr] = req.sm_wdata;
      #1;
      checks++;
      if (rsp.dvs_rdata != e_d || rsp.sm_rdata1 != e_s1 || rsp.sm_rdata2 != e_s2) begin
        failures++; $display("ERR at %0d", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
