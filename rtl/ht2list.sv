// ht2list: "HT 2 LIST", turns the normalised histogram into a list of
// non-zero pixels.
//
// After `start` the block reads the bank one pixel per clock in address
// order (row-major, address = {y, x}), together with the SMarray word that
// holds the pixel's mask bit. Pixels whose bit is set are pushed, as
// (X, Y, value), into a small FIFO that feeds the sparsity-map sender with a
// valid/ready handshake; pixels whose bit is clear are skipped. Behind the
// scan every DVSmem word is written back to zero, so that the bank is empty
// for its next collection. The mask, not the value, decides what is
// non-zero, because the normalisation maps an empty pixel to 127.
//
// The paper gives the block's name, its (X, Y, value, valid) output and its
// purpose; the scan order, the FIFO and the clearing are this design's
// choices. Timing: one pixel per clock while the FIFO has room; `done`
// pulses when the last pixel has been read (the FIFO may still hold items).
module ht2list
  import dvs2sm_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output bank_req_t  breq,
  input  bank_rsp_t  brsp,
  output list_item_t item,
  output logic       item_valid,
  input  logic       item_ready,
  output logic       done
);

  logic                          scanning, pend;
  logic [ADDR_W:0]               addr;       // next pixel to read, NPIX when finished
  logic [ADDR_W-1:0]             pend_addr;
  logic                          issue, hit, fifo_empty, fifo_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  list_item_t                    push_item;

  assign issue = scanning && (32'(fifo_count) + (pend ? 1 : 0) < FIFO_DEPTH);
  assign hit   = pend && brsp.sm_rdata1[pend_addr[3:0]];

  assign push_item.y     = pend_addr[ADDR_W-1:X_W];
  assign push_item.x     = pend_addr[X_W-1:0];
  assign push_item.value = brsp.dvs_rdata;

  always_comb begin
    breq           = BANK_REQ_IDLE;
    breq.dvs_raddr = addr[ADDR_W-1:0];
    breq.sm_raddr1 = addr[ADDR_W-1:4];
    breq.dvs_we    = pend;
    breq.dvs_waddr = pend_addr;
    breq.dvs_wdata = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning  <= 1'b0;
      pend      <= 1'b0;
      addr      <= '0;
      pend_addr <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= issue;
      if (issue) begin
        pend_addr <= addr[ADDR_W-1:0];
        addr      <= addr + 1'b1;
        if (addr == (ADDR_W+1)'(NPIX - 1)) scanning <= 1'b0;
      end
      if (pend && !scanning && !issue && addr == (ADDR_W+1)'(NPIX)) done <= 1'b1;
      if (start) begin
        scanning <= 1'b1;
        addr     <= '0;
      end
    end
  end

  sync_fifo #(.T(list_item_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .clear (start),
    .push  (hit),
    .din   (push_item),
    .pop   (item_valid && item_ready),
    .dout  (item),
    .empty (fifo_empty),
    .full  (fifo_full),
    .count (fifo_count)
  );

  assign item_valid = !fifo_empty;

endmodule
