// dvs2sm_top: DVS events to normalised sparsity maps, ready for a CNN
// accelerator.
//
// A parallel-AER event camera (64x64 pixels) sends address events. They are
// counted into a 64x64 histogram in one of two memory banks; after Nev
// events (2048 by default) that bank is full and collection continues in
// the other bank while the full one is normalised (mean, variance, sigma,
// then every pixel scaled to 0..255 by 22 parallel NORM blocks) and sent out
// in the accelerator's compressed form: a 16-bit sparsity-map word per 16
// pixels, followed by the values of the non-zero pixels. The two banks work
// in ping-pong, so collection, normalisation and the accelerator's own work
// overlap. When both banks are busy the circuit withholds the AER
// acknowledge and the sensor waits.
//
// Blocks: aer_rx (AER handshake), cfg_regs (Nev, polarity mode), ev_collector
// (histogram and S, c), two hist_bank (DVSmem + SMarray), frame_proc
// (DIV, VAR, SQRT, NORM, HT 2 LIST, SM STM).
//
// Bank life cycle (this design's choice; the paper shows the ping-pong but
// not its control): EMPTY -> COLLECTING -> FULL -> PROCESSING -> EMPTY.
// After reset both banks are cleared by a 4096-clock pass before the first
// event is acknowledged. Outputs: ZSidata/ZSitype/ZSivalid/ZSiaddr with
// input ZSien form the accelerator's input bus (a word moves when ZSivalid
// and ZSien are high); busy is high while a frame is processed; dvs_stall is
// high while an event waits because no bank is free; frame_done pulses when
// a frame has been sent; frame_mean and frame_sigma show the statistics of
// the frame being normalised.
module dvs2sm_top
  import dvs2sm_pkg::*;
#(
  parameter int unsigned NEV_RESET = NEV_DEFAULT,
  parameter int unsigned LANES     = NORM_LANES
)(
  input  logic              clk,
  input  logic              rst_n,
  // parallel AER from the DVS
  input  logic [AER_W-1:0]  aer_data,
  input  logic              aer_req_n,
  output logic              aer_ack_n,
  // configuration bus
  input  logic [31:0]       cfg_data,
  input  logic [3:0]        cfg_addr,
  input  logic              cfg_valid,
  // input bus of the CNN accelerator
  output logic [PIX_W-1:0]  ZSidata,
  output logic              ZSitype,
  output logic              ZSivalid,
  output logic [ADDR_W-1:0] ZSiaddr,
  input  logic              ZSien,
  // status
  output logic              busy,
  output logic              dvs_stall,
  output logic              frame_done,
  output logic signed [FX_W-1:0] frame_mean,   // Q16.8, of the frame in work
  output logic signed [FX_W-1:0] frame_sigma   // Q16.8, of the frame in work
);

  typedef enum logic [1:0] {B_EMPTY, B_COLLECT, B_FULL, B_PROC} bank_state_e;

  bank_state_e bstate [2];
  logic        col_bank, col_active, proc_bank;
  logic signed [SUM_W-1:0] s_bank [2];
  logic [CNT_W-1:0]        c_bank [2];

  // ---- configuration ----
  logic [NEV_W-1:0] nev;
  logic             rectify;

  cfg_regs #(.NEV_RESET(NEV_RESET)) u_cfg (
    .clk, .rst_n, .cfg_data, .cfg_addr, .cfg_valid, .nev, .rectify
  );

  // ---- AER ----
  aer_event_t ev;
  logic       ev_valid, ev_ready;

  aer_rx u_aer (
    .clk, .rst_n, .aer_data, .aer_req_n, .aer_ack_n, .ev, .ev_valid, .ev_ready
  );

  // ---- clear pass after reset ----
  logic            clearing;
  logic [ADDR_W:0] clr_addr;
  bank_req_t       clr_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == (ADDR_W+1)'(NPIX - 1)) clearing <= 1'b0;
    end
  end

  always_comb begin
    clr_req           = BANK_REQ_IDLE;
    clr_req.dvs_we    = clearing;
    clr_req.dvs_waddr = clr_addr[ADDR_W-1:0];
    clr_req.sm_we     = clearing && (clr_addr < (ADDR_W+1)'(NSMW));
    clr_req.sm_waddr  = clr_addr[SMA_W-1:0];
  end

  // ---- collector ----
  bank_req_t col_req, proc_req;
  bank_rsp_t col_rsp, proc_rsp;
  bank_req_t breq [2];
  bank_rsp_t brsp [2];
  logic      col_full;
  logic signed [SUM_W-1:0] col_s;
  logic [CNT_W-1:0]        col_c;

  ev_collector u_col (
    .clk, .rst_n,
    .ev, .ev_valid, .ev_ready,
    .nev, .rectify,
    .enable (col_active && !clearing),
    .breq   (col_req),
    .brsp   (col_rsp),
    .full   (col_full),
    .sum_s  (col_s),
    .cnt_c  (col_c)
  );

  // ---- frame processor ----
  logic proc_start, proc_busy, proc_done;
  logic proc_sel;                 // the full bank that proc_start hands over

  frame_proc #(.LANES(LANES)) u_proc (
    .clk, .rst_n,
    .start   (proc_start),
    .sum_s   (s_bank[proc_sel]),
    .cnt_c   (c_bank[proc_sel]),
    .rectify,
    .breq    (proc_req),
    .brsp    (proc_rsp),
    .ZSidata, .ZSitype, .ZSivalid, .ZSiaddr, .ZSien,
    .busy    (proc_busy),
    .mean    (frame_mean),
    .sigma   (frame_sigma),
    .done    (proc_done)
  );

  // ---- the two banks ----
  for (genvar i = 0; i < 2; i++) begin : g_bank
    always_comb begin
      if (clearing)                          breq[i] = clr_req;
      else if (col_active && col_bank == i)  breq[i] = col_req;
      else if (proc_busy && proc_bank == i)  breq[i] = proc_req;
      else                                   breq[i] = BANK_REQ_IDLE;
    end

    hist_bank u_bank (.clk, .req(breq[i]), .rsp(brsp[i]));
  end

  assign col_rsp  = brsp[col_bank];
  assign proc_rsp = brsp[proc_bank];

  // ---- bank control ----

  always_comb begin
    proc_start = 1'b0;
    proc_sel   = (bstate[0] == B_FULL) ? 1'b0 : 1'b1;
    if (!proc_busy && !clearing)
      proc_start = (bstate[0] == B_FULL) || (bstate[1] == B_FULL);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bstate[0]  <= B_COLLECT;
      bstate[1]  <= B_EMPTY;
      col_bank   <= 1'b0;
      col_active <= 1'b1;
      proc_bank  <= 1'b0;
      s_bank[0]  <= '0; s_bank[1] <= '0;
      c_bank[0]  <= '0; c_bank[1] <= '0;
    end else begin
      // a frame has been sent: its bank is free again
      if (proc_done) bstate[proc_bank] <= B_EMPTY;

      // start processing a full bank
      if (proc_start) begin
        proc_bank        <= proc_sel;
        bstate[proc_sel] <= B_PROC;
      end

      // collection: hand over a full bank, move to a free one
      if (col_active && col_full) begin
        bstate[col_bank] <= B_FULL;
        s_bank[col_bank] <= col_s;
        c_bank[col_bank] <= col_c;
        if (bstate[!col_bank] == B_EMPTY) begin
          bstate[!col_bank] <= B_COLLECT;
          col_bank          <= !col_bank;
        end else begin
          col_active <= 1'b0;
        end
      end else if (!col_active) begin
        if (bstate[0] == B_EMPTY) begin
          bstate[0]  <= B_COLLECT;
          col_bank   <= 1'b0;
          col_active <= 1'b1;
        end else if (bstate[1] == B_EMPTY) begin
          bstate[1]  <= B_COLLECT;
          col_bank   <= 1'b1;
          col_active <= 1'b1;
        end
      end
    end
  end

  assign busy       = proc_busy;
  assign dvs_stall  = ev_valid && !col_active;
  assign frame_done = proc_done;

endmodule
