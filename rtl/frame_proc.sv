// frame_proc: normalises one full histogram bank and sends it to the
// accelerator.
//
// When the collector has filled a bank, `start` hands over the bank's S
// (sum of pixel values) and c (number of non-zero pixels) and the engine
// runs the stages of the paper's pipeline one after the other on that bank:
//
//   DIV   mean = S / c                     (Q16.8, sequential divider)
//   VAR   sum over pixels of (F - mean)^2, divided by c   (var_unit)
//   SQRT  sigma = sqrt(variance)           (Q16.8, isqrt_unit)
//   NORM  every pixel through the 22 NORM blocks, one per clock, results
//         written back over the histogram in DVSmem (norm_array)
//   HT2SM the list builder (ht2list) and the sparsity-map sender (sm_stm)
//         stream the frame out on the ZSi* bus and clear the bank
//
// `done` pulses when the last word of the frame has been accepted; the bank
// is then empty again. The bank is reached through one bank_req_t /
// bank_rsp_t port, which the engine hands to whichever stage is running.
//
// From the paper: the stages, their order and the 22-fold NORM. This
// design's choices: stages do not overlap within a bank, an empty frame
// (c = 0) gets mean 0, and sigma saturates at the largest Q16.8 value.
// Timing at 64x64: about 40 + 4096 + 64 + 32 + 4096 + 10 clocks before the
// stream starts, then about 4096 clocks for the stream if ZSien stays high.
module frame_proc
  import dvs2sm_pkg::*;
#(
  parameter bit          ALL_PIXELS = 1'b1,
  parameter int unsigned LANES      = NORM_LANES
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [SUM_W-1:0] sum_s,
  input  logic [CNT_W-1:0]        cnt_c,
  input  logic                    rectify,
  output bank_req_t               breq,
  input  bank_rsp_t               brsp,
  output logic [PIX_W-1:0]        ZSidata,
  output logic                    ZSitype,
  output logic                    ZSivalid,
  output logic [ADDR_W-1:0]       ZSiaddr,
  input  logic                    ZSien,
  output logic                    busy,
  output logic signed [FX_W-1:0]  mean,
  output logic signed [FX_W-1:0]  sigma,
  output logic                    done
);

  typedef enum logic [2:0] {P_IDLE, P_DIV, P_VAR, P_SQRT, P_NORM, P_EMIT} phase_e;
  phase_e phase;

  localparam int unsigned DNW = SUM_W + FRAC;
  localparam logic signed [FX_W-1:0] FX_MAX = {1'b0, {(FX_W-1){1'b1}}};

  logic signed [SUM_W-1:0] s_lat;
  logic [CNT_W-1:0]        c_lat;
  logic                    rect_lat;

  // ---- DIV ----
  logic            div_start, div_done, div_busy;
  logic [DNW-1:0]  div_quo;
  logic [CNT_W-1:0] div_rem;
  logic [SUM_W-1:0] s_mag;
  assign s_mag = s_lat[SUM_W-1] ? SUM_W'(-s_lat) : SUM_W'(s_lat);

  seq_div #(.NW(DNW), .DW(CNT_W)) u_mean_div (
    .clk, .rst_n,
    .start (div_start),
    .num   ({s_mag, {FRAC{1'b0}}}),
    .den   (c_lat),
    .quo   (div_quo),
    .rem   (div_rem),
    .done  (div_done),
    .busy  (div_busy)
  );

  // ---- pixel scan used by VAR and NORM ----
  logic [ADDR_W:0]   scan;          // next address to read, NPIX when done
  logic              scan_on, rd_v;
  logic [ADDR_W-1:0] rd_addr;
  logic              rd_last;

  // ---- VAR ----
  logic        var_start, var_done;
  logic [63:0] var_q16;

  var_unit #(.ALL_PIXELS(ALL_PIXELS)) u_var (
    .clk, .rst_n,
    .start     (var_start),
    .pix_valid (rd_v && phase == P_VAR),
    .pix       (signed'(brsp.dvs_rdata)),
    .last      (rd_last),
    .mean,
    .cnt_c     (c_lat),
    .var_q16,
    .done      (var_done)
  );

  // ---- SQRT ----
  logic        sq_start, sq_done, sq_busy;
  logic [31:0] root;

  isqrt_unit #(.W(64)) u_sqrt (
    .clk, .rst_n,
    .start (sq_start),
    .x     (var_q16),
    .root,
    .done  (sq_done),
    .busy  (sq_busy)
  );

  // ---- NORM ----
  logic              na_in_ready, na_out_valid;
  logic [PIX_W-1:0]  na_norm;
  logic [ADDR_W-1:0] na_out_addr;
  logic [ADDR_W:0]   norm_written;

  norm_array #(.LANES(LANES)) u_norm (
    .clk, .rst_n,
    .in_valid  (rd_v && phase == P_NORM),
    .in_ready  (na_in_ready),
    .pixel     (signed'(brsp.dvs_rdata)),
    .addr      (rd_addr),
    .sigma,
    .rectify   (rect_lat),
    .out_valid (na_out_valid),
    .norm      (na_norm),
    .out_addr  (na_out_addr)
  );

  // ---- HT2SM ----
  logic       emit_start, list_done, stm_done, list_seen, stm_seen;
  bank_req_t  list_req, stm_req;
  list_item_t item;
  logic       item_valid, item_ready;

  ht2list u_list (
    .clk, .rst_n,
    .start      (emit_start),
    .breq       (list_req),
    .brsp,
    .item,
    .item_valid,
    .item_ready,
    .done       (list_done)
  );

  sm_stm u_stm (
    .clk, .rst_n,
    .start      (emit_start),
    .item,
    .item_valid,
    .item_ready,
    .breq       (stm_req),
    .brsp,
    .ZSidata,
    .ZSitype,
    .ZSivalid,
    .ZSiaddr,
    .ZSien,
    .done       (stm_done)
  );

  // ---- bank port ----
  always_comb begin
    breq = BANK_REQ_IDLE;
    unique case (phase)
      P_VAR:  breq.dvs_raddr = scan[ADDR_W-1:0];
      P_NORM: begin
        breq.dvs_raddr = scan[ADDR_W-1:0];
        breq.dvs_we    = na_out_valid;
        breq.dvs_waddr = na_out_addr;
        breq.dvs_wdata = na_norm;
      end
      P_EMIT: begin
        breq.dvs_raddr = list_req.dvs_raddr;
        breq.dvs_we    = list_req.dvs_we;
        breq.dvs_waddr = list_req.dvs_waddr;
        breq.dvs_wdata = list_req.dvs_wdata;
        breq.sm_raddr1 = list_req.sm_raddr1;
        breq.sm_raddr2 = stm_req.sm_raddr2;
        breq.sm_we     = stm_req.sm_we;
        breq.sm_waddr  = stm_req.sm_waddr;
        breq.sm_wdata  = stm_req.sm_wdata;
      end
      default: ;
    endcase
  end

  assign busy = (phase != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE;
      s_lat <= '0; c_lat <= '0; rect_lat <= 1'b1;
      mean <= '0; sigma <= '0;
      div_start <= 1'b0; var_start <= 1'b0; sq_start <= 1'b0; emit_start <= 1'b0;
      scan <= '0; scan_on <= 1'b0; rd_v <= 1'b0; rd_addr <= '0; rd_last <= 1'b0;
      norm_written <= '0; list_seen <= 1'b0; stm_seen <= 1'b0; done <= 1'b0;
    end else begin
      div_start  <= 1'b0;
      var_start  <= 1'b0;
      sq_start   <= 1'b0;
      emit_start <= 1'b0;
      done       <= 1'b0;

      // read pipeline: address this clock, data next clock
      rd_v    <= scan_on;
      rd_addr <= scan[ADDR_W-1:0];
      rd_last <= scan_on && (scan == (ADDR_W+1)'(NPIX - 1));
      if (scan_on) begin
        scan <= scan + 1'b1;
        if (scan == (ADDR_W+1)'(NPIX - 1)) scan_on <= 1'b0;
      end

      unique case (phase)
        P_IDLE: if (start) begin
          s_lat     <= sum_s;
          c_lat     <= cnt_c;
          rect_lat  <= rectify;
          div_start <= 1'b1;
          phase     <= P_DIV;
        end
        P_DIV: if (div_done) begin
          if (c_lat == '0)                          mean <= '0;
          else if (div_quo > DNW'(FX_MAX))          mean <= s_lat[SUM_W-1] ? -FX_MAX : FX_MAX;
          else if (s_lat[SUM_W-1])                  mean <= -FX_W'(div_quo);
          else                                      mean <= FX_W'(div_quo);
          var_start <= 1'b1;
          scan      <= '0;
          scan_on   <= 1'b1;
          phase     <= P_VAR;
        end
        P_VAR: if (var_done) begin
          sq_start <= 1'b1;
          phase    <= P_SQRT;
        end
        P_SQRT: if (sq_done) begin
          sigma        <= (root > 32'(FX_MAX)) ? FX_MAX : FX_W'(root);
          scan         <= '0;
          scan_on      <= 1'b1;
          norm_written <= '0;
          phase        <= P_NORM;
        end
        P_NORM: begin
          if (na_out_valid) norm_written <= norm_written + 1'b1;
          if (norm_written == (ADDR_W+1)'(NPIX)) begin
            emit_start <= 1'b1;
            list_seen  <= 1'b0;
            stm_seen   <= 1'b0;
            phase      <= P_EMIT;
          end
        end
        P_EMIT: begin
          // both the list scan (which also clears DVSmem) and the sender
          // (which clears SMarray) must be finished before the bank is free
          if (list_done) list_seen <= 1'b1;
          if (stm_done)  stm_seen  <= 1'b1;
          if ((list_seen || list_done) && (stm_seen || stm_done)) begin
            done  <= 1'b1;
            phase <= P_IDLE;
          end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  // The NORM lanes must never refuse a pixel of the scan.
  a_norm_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                 rd_v && phase == P_NORM |-> na_in_ready);
  // Every listed pixel must have been sent when the frame is finished.
  a_list_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                 done |-> !item_valid);

endmodule
