// tdc_pkg: types and constants shared by the TDC power-monitor IP.
//
// The output module can present the registered delay-line taps in three
// forms, selected by tdc_mode_e. The AXI4-Lite register offsets used by the
// wrapper and by any driver are collected here so both sides agree. The three
// output forms follow the paper; the encodings and the register map are this
// design's own choices.
package tdc_pkg;
  timeunit 1ps; timeprecision 1fs;

  // Output forms of the output module.
  typedef enum logic [1:0] {
    TDC_MODE_CONCAT = 2'd0,   // raw taps, concatenated
    TDC_MODE_SUM    = 2'd1,   // number of taps at 1
    TDC_MODE_EXPSUM = 2'd2    // exponentially weighted running sum of the count
  } tdc_mode_e;

  // AXI4-Lite data width and register offsets (byte addresses).
  localparam int unsigned AXI_DW   = 32;
  localparam int unsigned AXI_AW   = 8;
  localparam logic [7:0] REG_CTRL  = 8'h00;  // [0] enable, [2:1] mode
  localparam logic [7:0] REG_DELAY = 8'h04;  // [7:0] coarse select, [15:8] fine select
  localparam logic [7:0] REG_INFO  = 8'h08;  // [7:0] N_COARSE, [15:8] N_FINE, [31:16] TAPS
  localparam logic [7:0] REG_COUNT = 8'h0C;  // number of output samples received
  localparam logic [7:0] REG_OUT0  = 8'h10;  // output bits [31:0]; reading it latches all words
                                             // OUT1.. at 0x14, 0x18, ... hold bits [63:32], ...

  // AXI response codes.
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  // Nominal supply used by the delay-line models (delay ~ 1/V).
  localparam int unsigned VNOM_MV = 1000;
endpackage
