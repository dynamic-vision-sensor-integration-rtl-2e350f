// isqrt_unit: integer square root, the SQRT stage of the normalisation.
//
// Computes root = floor(sqrt(x)) by the bitwise (digit-by-digit) method:
// a test bit starts at the top even position of x and moves down two places
// per clock; whenever the remainder is at least the trial value it is
// subtracted and the bit enters the root. W/2 clocks after `start`, `done`
// pulses for one clock; `root` holds until the next start.
//
// The variance arrives with 16 fractional bits, so the root carries 8: it
// is sigma in the Q16.8 format of the normalisation code. The paper builds
// this stage with high-level synthesis and gives only its function; the
// method is this design's choice.
module isqrt_unit #(
  parameter int unsigned W = 64            // even
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic [W/2-1:0] root,
  output logic           done,
  output logic           busy
);

  logic [W-1:0] op, res, one;
  logic [W-1:0] trial;

  assign trial = res + one;
  assign root  = res[W/2-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op <= '0; res <= '0; one <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        op   <= x;
        res  <= '0;
        one  <= W'(1) << (W-2);
        busy <= 1'b1;
      end else if (busy) begin
        if (op >= trial) begin
          op  <= op - trial;
          res <= (res >> 1) + one;
        end else begin
          res <= res >> 1;
        end
        one <= one >> 2;
        if (one[0]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
