// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// Used for the two divisions of the normalisation (Eq. 2): the mean S/c and
// the variance sum/c. A pulse on `start` loads num and den; NW clocks later
// `done` pulses for one clock with quo = floor(num/den) and rem the
// remainder, and both hold until the next start. Division by zero returns a
// quotient of all ones. `busy` is high while dividing.
//
// The paper builds its divider with high-level synthesis and does not give
// its insides; a radix-2 restoring divider is the simplest circuit for the
// job and is this design's choice.
module seq_div #(
  parameter int unsigned NW = 40,
  parameter int unsigned DW = 16
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic [NW-1:0] quo,
  output logic [DW-1:0] rem,
  output logic          done,
  output logic          busy
);

  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW-1:0] r;        // partial remainder, always below den
  logic [NW-1:0] q;        // dividend bits shifting out, quotient shifting in
  logic [DW-1:0] d;
  logic [CW-1:0] n;
  logic [DW+1:0] trial;    // sign bit DW+1

  assign trial = {1'b0, r, q[NW-1]} - {2'b00, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; q <= '0; d <= '0; n <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        r    <= '0;
        q    <= num;
        d    <= den;
        n    <= CW'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[DW+1]) begin
          r <= trial[DW-1:0];
          q <= {q[NW-2:0], 1'b1};
        end else begin
          r <= {r[DW-2:0], q[NW-1]};
          q <= {q[NW-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quo = q;
  assign rem = r;

endmodule
