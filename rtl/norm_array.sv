// norm_array: the NORM stage built from LANES parallel NORM blocks.
//
// A single NORM block takes several clocks per pixel. As in the paper, the
// block is replicated (22 times) and fed round-robin: pixel k goes to lane
// k mod LANES, one pixel per clock, read from consecutive BRAM addresses.
// Every lane has the same latency, so results come back in input order, one
// per clock, after the latency of one block; each result carries the pixel
// address it belongs to so it can be written back to the same BRAM word.
//
// Interface: in_valid/in_ready with pixel and its address; out_valid with
// the Q8.8 result and its address (no back-pressure on the output). sigma
// and rectify must be stable while pixels are in flight. in_ready is low
// only if the next lane is still busy, which cannot happen while LANES is at
// least the block latency (9 clocks).
module norm_array
  import dvs2sm_pkg::*;
#(
  parameter int unsigned LANES = NORM_LANES
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [PIX_W-1:0] pixel,
  input  logic [ADDR_W-1:0]       addr,
  input  logic signed [FX_W-1:0]  sigma,
  input  logic                    rectify,
  output logic                    out_valid,
  output logic [PIX_W-1:0]        norm,
  output logic [ADDR_W-1:0]       out_addr
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;

  logic [LW-1:0]      iptr, optr;
  logic [LANES-1:0]   lane_start, lane_done, lane_idle, lane_ready;
  logic [PIX_W-1:0]   lane_norm [LANES];
  logic [ADDR_W-1:0]  lane_addr [LANES];

  assign in_ready = lane_idle[iptr];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    assign lane_start[i] = in_valid && in_ready && (iptr == LW'(i));

    norm_unit u_norm (
      .clk, .rst_n,
      .start   (lane_start[i]),
      .sigma,
      .pixel,
      .rectify,
      .norm    (lane_norm[i]),
      .done    (lane_done[i]),
      .idle    (lane_idle[i]),
      .ready   (lane_ready[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)             lane_addr[i] <= '0;
      else if (lane_start[i]) lane_addr[i] <= addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iptr <= '0;
      optr <= '0;
    end else begin
      if (in_valid && in_ready) iptr <= (iptr == LW'(LANES - 1)) ? '0 : iptr + 1'b1;
      if (out_valid)            optr <= (optr == LW'(LANES - 1)) ? '0 : optr + 1'b1;
    end
  end

  assign out_valid = lane_done[optr];
  assign norm      = lane_norm[optr];
  assign out_addr  = lane_addr[optr];

  // Results must leave in order: no lane other than the expected one may finish.
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
                               (lane_done & ~(LANES'(1) << optr)) == '0);

endmodule
