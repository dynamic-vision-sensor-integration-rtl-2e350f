// seq_div_tb: random divisions against the language's / and %, division by
// zero, and the NW-clock latency from start to done.
module seq_div_tb;
  localparam int NW = 40, DW = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] num, quo;
  logic [DW-1:0] den, rem;
  logic done, busy;
  int checks = 0, failures = 0;

  seq_div #(.NW(NW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [NW-1:0] n, input logic [DW-1:0] d);
    int cyc = 0;
    @(negedge clk); num = n; den = d; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NW) begin failures++; $display("latency %0d", cyc); end
    checks++;
    if (d == 0) begin
      if (quo != '1) begin failures++; $display("div0 quo=%h", quo); end
    end else if (quo != n / NW'(d) || NW'(rem) != n % NW'(d)) begin
      failures++; $display("ERR %0d/%0d got %0d r %0d", n, d, quo, rem);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(40'd1000, 16'd7);
    run(40'hFF_FFFF_FFFF, 16'd1);
    run(40'hFF_FFFF_FFFF, 16'hFFFF);
    run(40'd5, 16'd9);
    run(40'd123, 16'd0);
    for (int i = 0; i < 300; i++) run(NW'({$urandom, $urandom}), 16'($urandom_range(1, 65535) >> $urandom_range(0, 15)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
