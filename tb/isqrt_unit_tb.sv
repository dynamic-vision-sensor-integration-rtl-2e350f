// isqrt_unit_tb: random radicands of every magnitude; the root must satisfy
// r^2 <= x < (r+1)^2, and done must come W/2 clocks after start.
module isqrt_unit_tb;
  localparam int W = 64;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] x;
  logic [W/2-1:0] root;
  logic done, busy;
  int checks = 0, failures = 0;

  isqrt_unit #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [W-1:0] v);
    int cyc = 0;
    logic [W:0] r, r1;
    @(negedge clk); x = v; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != W/2) begin failures++; $display("latency %0d", cyc); end
    r  = (W+1)'(root);
    r1 = r + 1;
    checks++;
    if (!(r * r <= (W+1)'(v) && (2*W)'(r1) * (2*W)'(r1) > (2*W)'(v))) begin
      failures++; $display("ERR sqrt(%0d) got %0d", v, root);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(0); run(1); run(2); run(3); run(4); run(65535); run(65536); run('1);
    for (int i = 0; i < 300; i++) run({$urandom, $urandom} >> $urandom_range(0, 63));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
