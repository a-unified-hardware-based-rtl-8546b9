// uniguard_tdc: top of the TDC power-monitor IP, the hardware half of a
// side-channel threat detector for FPGA AI accelerators. Placed on the same
// FPGA as the accelerator, it measures how far the sensor clock travels
// through a delay line in one clock period. Switching in the accelerator
// lowers the shared supply, slows the delay line, and so changes the reading.
// The readings, collected through AXI during each inference, form the power
// trace a software classifier inspects.
//
// Signal path (sensor clock domain): sensor_clk -> coarse delay line (LUT +
// latch stages, MUX) -> fine delay line (LUT stages, MUX) -> tapped delay line
// (CARRY4 chain, one flip-flop per tap, clocked by sensor_clk) -> output module
// (raw / sum / exponential sum). The output crosses to the AXI clock in
// tdc_cdc_snapshot and is read through tdc_axil_regs, which also holds the
// MUX controls and the output mode. This chain and the three output forms are
// the paper's; the sizes, the register map and the clock crossing are this
// design's choices.
//
// Interface: sensor_clk (150 MHz in the reference setup), the AXI4-Lite slave
// on aclk (10 MHz there) with active-low aresetn, and vdd_mv, the supply seen
// by the delay lines in millivolts. vdd_mv exists only for the behavioural
// delay-line models: in silicon it is the power rail itself, and a testbench
// drives it to stand for the accelerator's load on the supply.
//
// Timing: a new sample every sensor_clk cycle while enabled (taps registered
// one cycle, output one more); the AXI side sees a fresh snapshot every few
// AXI cycles (see tdc_cdc_snapshot). The MUX controls drive the delay lines
// directly; they are quasi-static and meant to change only during calibration.
module uniguard_tdc
  import tdc_pkg::*;
#(
  parameter int unsigned N_COARSE     = 16,
  parameter int unsigned N_FINE       = 16,
  parameter int unsigned N_CARRY4     = 32,
  parameter int unsigned EXP_SHIFT    = 4,
  parameter tdc_mode_e   DEFAULT_MODE = TDC_MODE_SUM,
  localparam int unsigned TAPS        = 4 * N_CARRY4
) (
  input  logic                sensor_clk,
  input  logic                aclk,
  input  logic                aresetn,
  input  logic [AXI_AW-1:0]   s_axi_awaddr,
  input  logic                s_axi_awvalid,
  output logic                s_axi_awready,
  input  logic [AXI_DW-1:0]   s_axi_wdata,
  input  logic [AXI_DW/8-1:0] s_axi_wstrb,
  input  logic                s_axi_wvalid,
  output logic                s_axi_wready,
  output logic [1:0]          s_axi_bresp,
  output logic                s_axi_bvalid,
  input  logic                s_axi_bready,
  input  logic [AXI_AW-1:0]   s_axi_araddr,
  input  logic                s_axi_arvalid,
  output logic                s_axi_arready,
  output logic [AXI_DW-1:0]   s_axi_rdata,
  output logic [1:0]          s_axi_rresp,
  output logic                s_axi_rvalid,
  input  logic                s_axi_rready,
  input  logic [15:0]         vdd_mv
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned CSEL_W = $clog2(N_COARSE);
  localparam int unsigned FSEL_W = $clog2(N_FINE);

  // Configuration (AXI domain) and its sensor-domain copies.
  logic              cfg_en;
  tdc_mode_e         cfg_mode;
  logic [CSEL_W-1:0] cfg_coarse;
  logic [FSEL_W-1:0] cfg_fine;
  logic              s_en;
  logic [1:0]        s_mode_bits;

  logic s_rst_n;
  tdc_reset_sync u_rst_sync (.clk(sensor_clk), .arst_n(aresetn), .rst_n(s_rst_n));

  tdc_sync_bits #(.W(3), .RST_VAL({DEFAULT_MODE, 1'b0})) u_cfg_sync (
    .clk(sensor_clk), .rst_n(s_rst_n), .d({cfg_mode, cfg_en}), .q({s_mode_bits, s_en}));

  // Delay path.
  logic coarse_out, fine_out;
  logic [TAPS-1:0] taps;

  tdc_coarse_delay_line #(.N_COARSE(N_COARSE), .VNOM_MV(VNOM_MV)) u_coarse (
    .clk_in(sensor_clk), .sel(cfg_coarse), .vdd_mv(vdd_mv), .clk_out(coarse_out));

  tdc_fine_delay_line #(.N_FINE(N_FINE), .VNOM_MV(VNOM_MV)) u_fine (
    .clk_in(coarse_out), .sel(cfg_fine), .vdd_mv(vdd_mv), .clk_out(fine_out));

  tdc_tapped_delay_line #(.N_CARRY4(N_CARRY4), .VNOM_MV(VNOM_MV)) u_tapped (
    .clk(sensor_clk), .line_in(fine_out), .vdd_mv(vdd_mv), .taps_q(taps));

  // Output module.
  logic [TAPS-1:0] out_data;
  logic            out_valid;
  tdc_output_module #(.TAPS(TAPS), .EXP_SHIFT(EXP_SHIFT)) u_out (
    .clk(sensor_clk), .rst_n(s_rst_n), .en(s_en), .mode(tdc_mode_e'(s_mode_bits)),
    .taps(taps), .out_data(out_data), .out_valid(out_valid));

  // Clock crossing to the AXI domain.
  logic [TAPS-1:0] snap_data;
  logic            snap_valid;
  tdc_cdc_snapshot #(.W(TAPS)) u_cdc (
    .src_clk(sensor_clk), .src_rst_n(s_rst_n), .src_data(out_data), .src_valid(out_valid),
    .dst_clk(aclk), .dst_rst_n(aresetn), .dst_data(snap_data), .dst_valid(snap_valid));

  // AXI wrapper.
  tdc_axil_regs #(.TAPS(TAPS), .N_COARSE(N_COARSE), .N_FINE(N_FINE),
                  .DEFAULT_MODE(DEFAULT_MODE)) u_regs (
    .aclk, .aresetn,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .cfg_en, .cfg_mode, .cfg_coarse, .cfg_fine,
    .snap_data, .snap_valid);
endmodule
