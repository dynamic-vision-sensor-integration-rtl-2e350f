// sm_stm: "SM STM", the state machine that sends a frame to the CNN
// accelerator in its compressed sparsity-map format.
//
// The 64x64 frame is sent as 256 groups of 16 pixels in address order. For
// each group the block reads the group's SMarray word, sends it as a
// sparsity-map word (ZSitype = 1), then sends the value of every pixel whose
// bit is set (ZSitype = 0), taking these values in order from the list of
// non-zero pixels built by ht2list. When a group is complete its SMarray
// word is written back to zero, ready for the next collection. ZSiaddr
// carries the pixel address {y, x} of a value, or of the group's first pixel
// for a sparsity-map word.
//
// Handshake: a word moves in every clock in which ZSivalid and ZSien are
// both high; while ZSien is low the block waits, and the frame stays in its
// bank ("normalised frames wait on BRAM" in the paper). The signal names
// come from the paper's block diagram; their widths, ZSiaddr's meaning and
// the order "map word, then its values" (the accelerator's compression
// format) are this design's choices. Timing: three clocks per group plus
// one clock per non-zero value when ZSien stays high.
module sm_stm
  import dvs2sm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  list_item_t        item,
  input  logic              item_valid,
  output logic              item_ready,
  output bank_req_t         breq,
  input  bank_rsp_t         brsp,
  output logic [PIX_W-1:0]  ZSidata,
  output logic              ZSitype,
  output logic              ZSivalid,
  output logic [ADDR_W-1:0] ZSiaddr,
  input  logic              ZSien,
  output logic              done
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_LOAD, S_SM, S_VAL, S_CLR} state_e;
  state_e state;

  logic [SMA_W-1:0] g;          // current group
  logic [SM_W-1:0]  smw;        // its map word
  logic [SM_W-1:0]  rem;        // bits still to send
  logic [3:0]       bitpos;     // lowest set bit of rem
  logic             xfer;
  zs_type_e         ztype;

  always_comb begin
    bitpos = '0;
    for (int i = SM_W - 1; i >= 0; i--) if (rem[i]) bitpos = 4'(i);
  end

  always_comb begin
    ZSivalid   = 1'b0;
    ZSidata    = '0;
    ZSiaddr    = '0;
    ztype      = ZS_VALUE;
    item_ready = 1'b0;
    unique case (state)
      S_SM: begin
        ZSivalid = 1'b1;
        ZSidata  = smw;
        ZSiaddr  = {g, 4'b0000};
        ztype    = ZS_SM;
      end
      S_VAL: begin
        ZSivalid   = item_valid;
        ZSidata    = item.value;
        ZSiaddr    = {item.y, item.x};
        item_ready = ZSien;
      end
      default: ;
    endcase
  end

  assign ZSitype = ztype;
  assign xfer    = ZSivalid && ZSien;

  always_comb begin
    breq           = BANK_REQ_IDLE;
    breq.sm_raddr2 = g;
    breq.sm_we     = (state == S_CLR);
    breq.sm_waddr  = g;
    breq.sm_wdata  = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      g     <= '0;
      smw   <= '0;
      rem   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g     <= '0;
          state <= S_RD;
        end
        S_RD:   state <= S_LOAD;              // address presented, data next clock
        S_LOAD: begin
          smw   <= brsp.sm_rdata2;
          rem   <= brsp.sm_rdata2;
          state <= S_SM;
        end
        S_SM: if (xfer) state <= (rem == '0) ? S_CLR : S_VAL;
        S_VAL: if (xfer) begin
          rem[bitpos] <= 1'b0;
          if ((rem & (rem - 1'b1)) == '0) state <= S_CLR;
        end
        S_CLR: begin
          g <= g + 1'b1;
          if (g == SMA_W'(NSMW - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Each value must belong to the pixel the map word announces next.
  a_order: assert property (@(posedge clk) disable iff (!rst_n)
                            state == S_VAL && xfer |-> {item.y, item.x} == {g, bitpos});

endmodule
