// cfg_regs_tb: reset values, writes to both registers, the Nev = 0 rule,
// writes to unused addresses and cycles without cfg_valid.
module cfg_regs_tb;
  logic clk = 0, rst_n = 0, cfg_valid = 0;
  logic [31:0] cfg_data;
  logic [3:0] cfg_addr;
  logic [15:0] nev;
  logic rectify;
  int checks = 0, failures = 0;

  cfg_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_addr = 4'(a); cfg_data = 32'(d); cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic expect_regs(input int n, input bit r);
    checks++;
    if (nev != 16'(n) || rectify != r) begin
      failures++; $display("ERR nev=%0d rect=%0d exp %0d %0d", nev, rectify, n, r);
    end
  endtask

  initial begin
    cfg_addr = 0; cfg_data = 0;
    repeat (2) @(negedge clk);
    expect_regs(2048, 1);
    rst_n = 1;
    wr(0, 100);    expect_regs(100, 1);
    wr(1, 0);      expect_regs(100, 0);
    wr(0, 0);      expect_regs(1, 0);
    wr(5, 7);      expect_regs(1, 0);
    @(negedge clk); cfg_addr = 0; cfg_data = 9; cfg_valid = 0;
    @(negedge clk); expect_regs(1, 0);
    for (int i = 0; i < 50; i++) begin
      automatic int n = $urandom_range(1, 65535);
      automatic bit r = 1'($urandom);
      wr(0, n); wr(1, int'(r)); expect_regs(n, r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
