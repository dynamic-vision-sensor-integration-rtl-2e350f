// dvs2sm_pkg: types and constants shared by the DVS-to-sparsity-map circuit.
//
// The histogram is 64x64 pixels (the sensor resolution drawn in the block
// diagram). Pixels are int16 event counts; after normalisation the same
// 16-bit words hold unsigned Q8.8 values. The sparsity map (SM) packs the
// non-zero mask of 16 consecutive pixels (row-major) into one 16-bit word,
// giving 256 SM words per frame. Internal fixed point follows the printed
// normalisation code: 24-bit words with 8 fractional bits (ap_fixed<24,16>).
package dvs2sm_pkg;

  localparam int unsigned X_W      = 6;             // 64 columns
  localparam int unsigned Y_W      = 6;             // 64 rows
  localparam int unsigned ADDR_W   = X_W + Y_W;     // pixel address {y,x}
  localparam int unsigned NPIX     = 1 << ADDR_W;   // 4096 pixels
  localparam int unsigned PIX_W    = 16;            // int16 count / Q8.8 result
  localparam int unsigned SM_W     = 16;            // pixels per SM word
  localparam int unsigned SMA_W    = ADDR_W - 4;    // SM word address
  localparam int unsigned NSMW     = NPIX / SM_W;   // 256 SM words
  localparam int unsigned CNT_W    = ADDR_W + 1;    // c: 0..4096
  localparam int unsigned SUM_W    = 32;            // S (signed)
  localparam int unsigned FRAC     = 8;             // data_t fraction bits
  localparam int unsigned FX_W     = 24;            // data_t width
  localparam int unsigned NEV_W    = 16;            // Nev register width
  localparam int unsigned NEV_DEFAULT = 2048;       // 2K events per histogram
  localparam int unsigned NORM_LANES  = 22;         // replicated NORM blocks

  // One address event as it arrives on the parallel AER bus.
  typedef struct packed {
    logic [Y_W-1:0] y;
    logic [X_W-1:0] x;
    logic           pol;   // 1: ON (darker to lighter), 0: OFF
  } aer_event_t;

  localparam int unsigned AER_W = $bits(aer_event_t);

  // One entry of the list of non-zero pixels (HT 2 LIST output).
  typedef struct packed {
    logic [Y_W-1:0]   y;
    logic [X_W-1:0]   x;
    logic [PIX_W-1:0] value;
  } list_item_t;

  // Kind of word on the NullHop input stream (ZSitype).
  typedef enum logic {
    ZS_VALUE = 1'b0,
    ZS_SM    = 1'b1
  } zs_type_e;

  // Port bundle of one histogram bank: DVSmem (1 read, 1 write) and
  // SMarray (2 reads, 1 write). Reads return data one cycle later.
  typedef struct packed {
    logic [ADDR_W-1:0] dvs_raddr;
    logic              dvs_we;
    logic [ADDR_W-1:0] dvs_waddr;
    logic [PIX_W-1:0]  dvs_wdata;
    logic [SMA_W-1:0]  sm_raddr1;
    logic [SMA_W-1:0]  sm_raddr2;
    logic              sm_we;
    logic [SMA_W-1:0]  sm_waddr;
    logic [SM_W-1:0]   sm_wdata;
  } bank_req_t;

  typedef struct packed {
    logic [PIX_W-1:0] dvs_rdata;
    logic [SM_W-1:0]  sm_rdata1;
    logic [SM_W-1:0]  sm_rdata2;
  } bank_rsp_t;

  localparam bank_req_t BANK_REQ_IDLE = '0;

endpackage
