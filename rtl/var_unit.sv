// var_unit: the VAR stage of the normalisation (Eq. 2 of the paper).
//
// Receives the histogram as a stream of int16 pixels, one per clock, and
// accumulates (F - mean)^2 with mean in Q16.8 (8 fractional bits), so each
// square has 16 fractional bits. After the pixel flagged `last` it divides
// the sum by c, the number of non-zero pixels, with a sequential divider and
// pulses `done`; var_q16 then holds the variance with 16 fractional bits,
// which the square-root stage turns into sigma with 8.
//
// The paper's equation sums over every pixel of the frame, zeros included,
// while its prose calls the mean an average over non-zero pixels.
// ALL_PIXELS = 1 (default) follows the equation; ALL_PIXELS = 0 skips zero
// pixels. Keeping 16 fractional bits in the variance is this design's
// choice. c = 0 (an empty frame) gives an all-ones variance.
// Timing: one pixel per clock, then 64 clocks for the division.
module var_unit
  import dvs2sm_pkg::*;
#(
  parameter bit ALL_PIXELS = 1'b1
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    pix_valid,
  input  logic signed [PIX_W-1:0] pix,
  input  logic                    last,
  input  logic signed [FX_W-1:0]  mean,
  input  logic [CNT_W-1:0]        cnt_c,
  output logic [63:0]             var_q16,
  output logic                    done
);

  localparam int unsigned DEV_W = FX_W + 2;

  logic [63:0]              acc;
  logic signed [DEV_W-1:0]  dev;
  logic [2*DEV_W-1:0]       sq;
  logic                     div_start, div_busy;
  logic [CNT_W-1:0]         div_rem;

  assign dev = DEV_W'(pix) * DEV_W'(signed'(1 << FRAC)) - DEV_W'(mean);
  assign sq  = unsigned'((2*DEV_W)'(dev) * (2*DEV_W)'(dev));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      div_start <= 1'b0;
    end else begin
      div_start <= 1'b0;
      if (start) begin
        acc <= '0;
      end else if (pix_valid) begin
        if (ALL_PIXELS || pix != '0) acc <= acc + 64'(sq);
        if (last) div_start <= 1'b1;
      end
    end
  end

  seq_div #(.NW(64), .DW(CNT_W)) u_div (
    .clk, .rst_n,
    .start (div_start),
    .num   (acc),
    .den   (cnt_c),
    .quo   (var_q16),
    .rem   (div_rem),
    .done,
    .busy  (div_busy)
  );

endmodule
