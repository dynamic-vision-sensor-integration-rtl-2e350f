// hist_bank: one half of the double-buffered histogram memory.
//
// DVSmem holds one int16 event count per pixel of the 64x64 histogram and,
// after normalisation, the Q8.8 result for that pixel. SMarray holds the
// mask of non-zero pixels, 16 pixels per word, which becomes the sparsity
// map sent to the accelerator. The design instantiates two banks and works
// on them in ping-pong: one collects events while the other is normalised
// and sent, as in the paper's pipeline.
//
// Both memories are plain arrays meant to map onto block RAM. DVSmem has one
// synchronous read port and one write port; SMarray has two synchronous read
// ports (one for the list builder, one for the sparsity-map sender) and one
// write port. Read data appear one clock after the address. A read and a
// write to the same address in one cycle return the old contents. The
// memory organisation and port count are this design's choice; the paper
// only says the buffers are in BRAM. Contents are not reset: the top clears
// both banks after reset and the processing path clears each word it sends.
module hist_bank
  import dvs2sm_pkg::*;
(
  input  logic      clk,
  input  bank_req_t req,
  output bank_rsp_t rsp
);

  logic [PIX_W-1:0] dvs_mem [NPIX];
  logic [SM_W-1:0]  sm_mem  [NSMW];

  always_ff @(posedge clk) begin
    if (req.dvs_we) dvs_mem[req.dvs_waddr] <= req.dvs_wdata;
    rsp.dvs_rdata <= dvs_mem[req.dvs_raddr];
  end

  always_ff @(posedge clk) begin
    if (req.sm_we) sm_mem[req.sm_waddr] <= req.sm_wdata;
    rsp.sm_rdata1 <= sm_mem[req.sm_raddr1];
    rsp.sm_rdata2 <= sm_mem[req.sm_raddr2];
  end

endmodule
