// norm_unit_tb: one NORM block against the reference routine, in both
// polarity modes, over random and corner pixels and sigmas; checks the
// 9-clock latency, the ready pulse and that every branch of the routine
// (zero pixel, clip to 1, clip to 0, division, sigma = 0) was taken.
module norm_unit_tb;
  import dvs2sm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, rectify = 0;
  logic signed [23:0] sigma;
  logic signed [15:0] pixel;
  logic [15:0] norm;
  logic done, idle, ready;
  int checks = 0, failures = 0;
  int n_zero = 0, n_hi = 0, n_lo = 0, n_div = 0, n_sig0 = 0;

  norm_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int s, input int p, input bit r);
    int cyc = 0, exp;
    bit saw_ready = 0;
    @(negedge clk); sigma = 24'(s); pixel = 16'(p); rectify = r; start = 1;
    @(negedge clk); start = 0; saw_ready = ready;
    while (!done) begin @(negedge clk); cyc++; end
    exp = ref_norm(s, p, r);
    checks += 3;
    if (cyc != 9) begin failures++; $display("latency %0d", cyc); end
    if (!saw_ready) failures++;
    if (norm != 16'(exp)) begin
      failures++; $display("ERR sigma=%0d pixel=%0d rect=%0d got %0d exp %0d", s, p, r, norm, exp);
    end
    if (p == 0) n_zero++;
    else if (s == 0) n_sig0++;
    else if (exp == 255*256) n_hi++;
    else if (exp == 0) n_lo++;
    else n_div++;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    checks++; if (!idle) failures++;
    run(256, 0, 0);          // zero pixel -> 127.0
    run(256, 1, 0);          // (1+3)/6
    run(256, 10, 0);         // clipped to 1
    run(256, -10, 0);        // clipped to 0
    run(256, 2, 1);          // rectified 2/3
    run(0, 5, 0);            // sigma 0
    run(0, -5, 1);
    run(100, 3, 1);
    for (int i = 0; i < 2000; i++) begin
      automatic int s = $urandom_range(0, 4096);
      automatic int p = int'($urandom_range(0, 40)) - 10;
      run(s, p, 1'($urandom));
    end
    for (int i = 0; i < 200; i++) run($urandom_range(0, 32'h7FFFFF), int'($urandom_range(0, 65535)) - 32768, 1'($urandom));
    checks++;
    if (n_zero == 0 || n_hi == 0 || n_lo == 0 || n_div == 0 || n_sig0 == 0) begin
      failures++; $display("branch not taken: %0d %0d %0d %0d %0d", n_zero, n_hi, n_lo, n_div, n_sig0);
    end
    $display("branches: zero=%0d clip1=%0d clip0=%0d divide=%0d sigma0=%0d", n_zero, n_hi, n_lo, n_div, n_sig0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
