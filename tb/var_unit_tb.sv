// var_unit_tb: streams 64x64 histograms (with random gaps in the stream) into
// two variance units, one summing over all pixels (the default, as in the
// equation) and one over the non-zero pixels only, and compares both results
// with the reference sums. Frames: random sparse ones of growing density,
// positive and signed; corner cases with a single active pixel, all active
// pixels equal, an empty histogram (c = 0: all-ones result), and full-scale
// int16 counts of both signs. The time from the last pixel to `done` is
// checked against the 64-step division that follows the stream.
module var_unit_tb;
  import dvs2sm_pkg::*;
  import dvs2sm_ref_pkg::*;
  localparam int DIV_CLKS = 64;
  logic clk = 0, rst_n = 0, start = 0, pix_valid = 0, last = 0;
  logic signed [15:0] pix;
  logic signed [23:0] mean;
  logic [12:0] cnt_c;
  logic [63:0] var_all, var_nz;
  logic done_all, done_nz;
  int checks = 0, failures = 0;

  var_unit #(.ALL_PIXELS(1'b1)) dut_all (.clk, .rst_n, .start, .pix_valid, .last, .pix,
                                        .mean, .cnt_c, .var_q16(var_all), .done(done_all));
  var_unit #(.ALL_PIXELS(1'b0)) dut_nz  (.clk, .rst_n, .start, .pix_valid, .last, .pix,
                                        .mean, .cnt_c, .var_q16(var_nz), .done(done_nz));

  always #5 clk = ~clk;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input int h[NPIX], input string what);
    int m, sg, c = 0, lat = 0;
    longint unsigned v_all, v_nz;
    for (int i = 0; i < NPIX; i++) if (h[i] != 0) c++;
    ref_stats(h, 1'b1, m, v_all, sg);
    ref_stats(h, 1'b0, m, v_nz, sg);
    @(negedge clk); start = 1; mean = 24'(m); cnt_c = 13'(c);
    @(negedge clk); start = 0;
    for (int i = 0; i < NPIX; i++) begin
      while ($urandom_range(0, 3) == 0) begin pix_valid = 0; last = 0; @(negedge clk); end
      pix_valid = 1; pix = 16'(h[i]); last = (i == NPIX - 1);
      @(negedge clk);
    end
    pix_valid = 0; last = 0;
    while (!done_all) begin @(negedge clk); lat++; end
    checks += 4;
    if (!done_nz) begin failures++; $display("ERR %s: the two units finished apart", what); end
    if (lat != DIV_CLKS + 1) begin failures++; $display("ERR %s: done %0d clocks after the stream", what, lat); end
    if (var_all != 64'(v_all)) begin failures++; $display("ERR %s: var(all) %0d exp %0d", what, var_all, v_all); end
    if (var_nz != 64'(v_nz)) begin failures++; $display("ERR %s: var(non-zero) %0d exp %0d", what, var_nz, v_nz); end
  endtask

  initial begin
    int h[NPIX];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      for (int i = 0; i < NPIX; i++)
        h[i] = ($urandom_range(0, 99) < 5 + 10*f) ? int'($urandom_range(0, 20*(f+1))) - ((f % 2 != 0) ? 10 : 0) : 0;
      run_frame(h, $sformatf("random %0d", f));
    end
    h = '{default: 0}; h[1234] = 57;                       run_frame(h, "single pixel");
    h = '{default: 0}; for (int i = 0; i < 300; i++) h[i * 13] = 9;
                                                           run_frame(h, "equal pixels");
    h = '{default: 0};                                     run_frame(h, "empty");
    for (int i = 0; i < NPIX; i++) h[i] = (i % 3 == 0) ? 32767 : ((i % 3 == 1) ? -32768 : 0);
                                                           run_frame(h, "full scale signed");
    for (int i = 0; i < NPIX; i++) h[i] = (i % 2 == 0) ? 32767 : 1;
                                                           run_frame(h, "full scale positive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
