// cfg_regs: the CFG block of the DVS-to-sparsity-map circuit.
//
// Holds the run-time settings written over a simple (data, addr, valid)
// bus, as the block diagram shows: a register is written in every clock in
// which cfg_valid is high. Register 0 is Nev, the number of events collected
// into one histogram (2048 after reset, the paper's 2K events; a value of 0
// is read as 1). Register 1 bit 0 selects rectified histograms (1, the reset
// value: every event counts +1) or signed ones (0: ON events +1, OFF -1); it
// also drives the rectifyPol input of the NORM blocks. The register map,
// widths and reset values other than Nev are this design's choice.
// Outputs change one clock after the write.
module cfg_regs
  import dvs2sm_pkg::*;
#(
  parameter int unsigned CFG_AW      = 4,
  parameter int unsigned CFG_DW      = 32,
  parameter int unsigned NEV_RESET   = NEV_DEFAULT
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CFG_DW-1:0] cfg_data,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic              cfg_valid,
  output logic [NEV_W-1:0]  nev,
  output logic              rectify
);

  localparam logic [CFG_AW-1:0] REG_NEV     = 0;
  localparam logic [CFG_AW-1:0] REG_RECTIFY = 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nev     <= NEV_W'(NEV_RESET);
      rectify <= 1'b1;
    end else if (cfg_valid) begin
      unique case (cfg_addr)
        REG_NEV:     nev     <= (cfg_data[NEV_W-1:0] == '0) ? NEV_W'(1) : cfg_data[NEV_W-1:0];
        REG_RECTIFY: rectify <= cfg_data[0];
        default: ;
      endcase
    end
  end

endmodule
