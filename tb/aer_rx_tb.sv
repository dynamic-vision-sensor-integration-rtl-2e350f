// aer_rx_tb: a behavioural DVS sender runs the four-phase AER handshake
// with random delays while the downstream side accepts at random. Every
// event must arrive once, in order, unchanged; ACK must stay high while the
// event has not been taken (a long stall is forced once); and a complete
// handshake with a prompt sender must take no more than ten clocks.
module aer_rx_tb;
  import dvs2sm_pkg::*;
  localparam int N = 400;
  logic clk = 0, rst_n = 0;
  logic [AER_W-1:0] aer_data;
  logic aer_req_n = 1, aer_ack_n;
  aer_event_t ev;
  logic ev_valid, ev_ready = 0;
  int checks = 0, failures = 0;
  logic [AER_W-1:0] sent[$];
  int nrx = 0, stall_cycles = 0;
  bit fast = 0;

  aer_rx dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  initial begin
    aer_data = '0;
    wait (rst_n);
    for (int i = 0; i < N; i++) begin
      automatic time t0;
      automatic logic [AER_W-1:0] w = AER_W'($urandom);
      while (!aer_ack_n) @(negedge clk);
      if (!fast) repeat ($urandom_range(0, 3)) @(negedge clk);
      aer_data = w; sent.push_back(w);
      @(negedge clk); aer_req_n = 0;
      t0 = $time;
      while (aer_ack_n) @(negedge clk);
      if (!fast) repeat ($urandom_range(0, 3)) @(negedge clk);
      aer_req_n = 1;
      aer_data = AER_W'($urandom);           // data may change once REQ is released
      if (fast) begin
        while (!aer_ack_n) @(negedge clk);
        checks++;
        if (($time - t0) / 10 > 10) begin failures++; $display("slow handshake %0d", ($time - t0) / 10); end
      end
    end
  end

  // receiver side
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) begin
      checks++;
      if (AER_W'(ev) != sent[nrx]) begin failures++; $display("ERR event %0d got %h exp %h", nrx, AER_W'(ev), sent[nrx]); end
      nrx++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (ev_valid && !ev_ready) begin
      checks++;
      if (!aer_ack_n) begin failures++; $display("ACK before accept"); end
    end
    ev_ready = (nrx >= 100 && nrx < 110) ? 1'b1 : (nrx == 50 && stall_cycles < 60) ? 1'b0 : (fast ? 1'b1 : 1'($urandom));
    if (nrx == 50 && ev_valid) stall_cycles++;
    if (nrx == 300) fast = 1;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    while (nrx < N) @(negedge clk);
    checks++;
    if (stall_cycles < 60) begin failures++; $display("stall not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
