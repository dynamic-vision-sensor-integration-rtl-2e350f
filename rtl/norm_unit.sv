// norm_unit: one NORM block, the normalisation of a single pixel.
//
// Computes, in fixed point, what the paper's printed C++ routine cpp_norm
// computes (data_t = 24-bit words with 8 fractional bits):
//
//   sig     = max(sigma, 0.1/255)              (0.1/255 rounds to 0 in data_t)
//   signed  : halfrng = 3*sig,  rng = 2*halfrng
//   rectify : halfrng = 0,      rng = 3*sig
//   pixel == 0 : out = (127/255) * 256 = 127.0
//   otherwise  : f = (pixel + halfrng) / rng, clipped to [0, 1]; out = f * 255
//
// so for signed histograms out = 255 * (F + 3 sigma) / (6 sigma), the
// normalisation formula of the paper scaled to 0..255. The division is done
// as an 8-step restoring division of (pixel + halfrng) by rng, which is only
// needed when 0 <= pixel + halfrng < rng; the clipped and zero cases are
// decided on `start`. Quotients are truncated, as ap_fixed does by default.
//
// Interface after the HLS block of the paper: start / done / idle / ready
// with sigma ("Variance IN (Q16.8)", which the code uses as sigma) and an
// int16 pixel in, a 16-bit Q8.8 result out. Latency: done pulses LATENCY =
// 9 clocks after the clock edge that takes start and `norm` holds until the next result; `ready`
// pulses the clock after start (inputs taken), `idle` is high when no pixel
// is in work. A new start is accepted only when idle.
//
// This design's choices: the result word is read as unsigned Q8.8 (the
// printed return type ap_fixed<16,8> would wrap values of 128 and above);
// rng <= 0 (sigma = 0) gives f = 1 for a positive numerator, else 0, where
// the C++ would divide by zero; latency is 9 clocks rather than the
// HLS block's 47 at 100 MHz.
module norm_unit
  import dvs2sm_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [FX_W-1:0]  sigma,
  input  logic signed [PIX_W-1:0] pixel,
  input  logic                    rectify,
  output logic [PIX_W-1:0]        norm,
  output logic                    done,
  output logic                    idle,
  output logic                    ready
);

  localparam int unsigned QBITS   = FRAC;                        // fraction bits of f
  localparam int unsigned LATENCY = QBITS + 1;                   // start to done
  localparam logic signed [FX_W-1:0] SIG_MIN = FX_W'((1 << FRAC) / 2550);       // 0.1/255
  localparam logic signed [FX_W-1:0] MPG     = FX_W'((127 << FRAC) / 255);      // 127/255
  localparam logic [PIX_W-1:0] ZERO_OUT = PIX_W'(MPG * 256);                    // * 256.0
  localparam logic [PIX_W-1:0] ONE_OUT  = PIX_W'(255 << FRAC);                  // 1.0 * 255

  logic signed [FX_W-1:0] sig, halfrng, rng, num;
  logic                   busy;
  logic [3:0]             step;
  logic [FX_W:0]          r;          // partial remainder
  logic [FX_W-1:0]        d;          // divisor (rng)
  logic [QBITS-1:0]       q;
  logic                   fixed;      // result decided without division
  logic [PIX_W-1:0]       fixed_out;
  logic [FX_W:0]          r2;

  always_comb begin
    sig = (sigma < SIG_MIN) ? SIG_MIN : sigma;
    if (!rectify) begin
      halfrng = FX_W'(3 * sig);
      rng     = FX_W'(2 * halfrng);
    end else begin
      halfrng = '0;
      rng     = FX_W'(3 * sig);
    end
    num = FX_W'(pixel) * FX_W'(signed'(1 << FRAC)) + halfrng;
  end

  assign r2   = {r[FX_W-1:0], 1'b0};
  assign idle = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; step <= '0; r <= '0; d <= '0; q <= '0;
      fixed <= 1'b0; fixed_out <= '0;
      norm <= '0; done <= 1'b0; ready <= 1'b0;
    end else begin
      done  <= 1'b0;
      ready <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        ready <= 1'b1;
        step  <= '0;
        r     <= {1'b0, num};
        d     <= rng;
        q     <= '0;
        fixed <= 1'b1;
        if (pixel == '0)        fixed_out <= ZERO_OUT;
        else if (rng <= 0)      fixed_out <= (num > 0) ? ONE_OUT : '0;
        else if (num < 0)       fixed_out <= '0;
        else if (num >= rng)    fixed_out <= ONE_OUT;
        else                    fixed <= 1'b0;
      end else if (busy) begin
        step <= step + 1'b1;
        if (step < 4'(QBITS)) begin
          if (r2 >= {1'b0, d}) begin
            r <= r2 - {1'b0, d};
            q <= {q[QBITS-2:0], 1'b1};
          end else begin
            r <= r2;
            q <= {q[QBITS-2:0], 1'b0};
          end
        end else if (step == 4'(QBITS)) begin
          norm <= fixed ? fixed_out : PIX_W'(q * 255);
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end

endmodule
