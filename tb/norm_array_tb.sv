// norm_array_tb: streams pixels into the 22 NORM lanes one per clock and
// checks that results come back in order, with their addresses, one per
// clock after the latency of one block, and equal to the reference routine.
module norm_array_tb;
  import dvs2sm_ref_pkg::*;
  localparam int N = 1000;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, rectify = 0;
  logic signed [15:0] pixel;
  logic [11:0] addr, out_addr;
  logic signed [23:0] sigma;
  logic out_valid;
  logic [15:0] norm;
  int checks = 0, failures = 0;
  int pix_q[$];
  int nout = 0, first_out = -1, last_out = -1, cyc = 0, first_in = -1;

  norm_array dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int exp = ref_norm(int'(sigma), pix_q[nout], rectify);
    checks++;
    if (norm != 16'(exp) || out_addr != 12'(nout)) begin
      failures++; $display("ERR %0d: got %0d@%0d exp %0d", nout, norm, out_addr, exp);
    end
    if (first_out < 0) first_out = cyc;
    last_out = cyc;
    nout++;
  end

  initial begin
    sigma = 24'd700;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      automatic int p = int'($urandom_range(0, 30)) - 5;
      pix_q.push_back(p);
      in_valid = 1; pixel = 16'(p); addr = 12'(i);
      if (first_in < 0) first_in = cyc;
      checks++; if (!in_ready) failures++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks += 3;
    if (nout != N) begin failures++; $display("got %0d results", nout); end
    if (last_out - first_out != N - 1) begin failures++; $display("not one per clock"); end
    if (first_out - first_in != 10) begin  // taken at the next edge, result 9 edges later
      failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
