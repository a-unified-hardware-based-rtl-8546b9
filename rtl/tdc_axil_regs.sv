// tdc_axil_regs: AXI4-Lite slave of the TDC power monitor (the "AXI wrapper"),
// in the AXI clock domain.
//
// The driver on the processor uses it to set the two multiplexer controls of
// the initial delay (coarse and fine select), to choose the output form and
// enable the sensor, and to read the sensor output. The paper names the AXI
// wrapper and its 10 MHz clock; the register map, the protocol subset and the
// reset values below are this design's own.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 CTRL   rw  [0] enable, [2:1] output mode (tdc_mode_e)
//   0x04 DELAY  rw  [7:0] coarse select, [15:8] fine select; a value past the
//                   last stage is stored as the last stage
//   0x08 INFO   ro  [7:0] N_COARSE, [15:8] N_FINE, [31:16] TAPS
//   0x0C COUNT  ro  number of output samples received from the sensor
//   0x10 OUT0   ro  output bits [31:0] of the latest sample; the read also
//                   latches the whole sample for the next words
//   0x14+4k OUTk ro bits [32k+31:32k] of the sample latched by the last OUT0
//                   read (k = 1 .. TAPS/32-1)
// Other offsets answer SLVERR with data 0; writes to read-only registers
// answer SLVERR and change nothing.
//
// Protocol: a write is taken when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY in that cycle), WSTRB is honoured,
// BVALID follows one cycle later. A read is taken when ARVALID is high and no
// read data is pending, RVALID follows one cycle later. One transaction of
// each kind at a time. aresetn is active low, asserted asynchronously; it must be released
// synchronously to aclk, as AXI requires.
module tdc_axil_regs
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS         = 128,
  parameter int unsigned N_COARSE     = 16,
  parameter int unsigned N_FINE       = 16,
  parameter tdc_mode_e   DEFAULT_MODE = TDC_MODE_SUM,
  localparam int unsigned CSEL_W      = $clog2(N_COARSE),
  localparam int unsigned FSEL_W      = $clog2(N_FINE),
  localparam int unsigned N_WORDS     = (TAPS + AXI_DW - 1) / AXI_DW
) (
  input  logic                aclk,
  input  logic                aresetn,
  // AXI4-Lite slave
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
  // Configuration to the sensor
  output logic                cfg_en,
  output tdc_mode_e           cfg_mode,
  output logic [CSEL_W-1:0]   cfg_coarse,
  output logic [FSEL_W-1:0]   cfg_fine,
  // Sensor output, already in the AXI clock domain
  input  logic [TAPS-1:0]     snap_data,
  input  logic                snap_valid
);
  timeunit 1ps; timeprecision 1fs;

  localparam logic [AXI_DW-1:0] INFO_VAL = {16'(TAPS), 8'(N_FINE), 8'(N_COARSE)};

  logic [N_WORDS*AXI_DW-1:0] snap_wide, rd_hold;
  always_comb snap_wide = (N_WORDS*AXI_DW)'(snap_data);

  logic [31:0] sample_count;

  // ---------------- Write channel ----------------
  logic wr_take;
  always_comb begin
    wr_take       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
    s_axi_awready = wr_take;
    s_axi_wready  = wr_take;
  end

  // Apply byte strobes to a 32-bit register value.
  function automatic logic [AXI_DW-1:0] apply_strb(logic [AXI_DW-1:0] old_v,
                                                   logic [AXI_DW-1:0] new_v,
                                                   logic [AXI_DW/8-1:0] strb);
    logic [AXI_DW-1:0] r;
    r = old_v;
    for (int b = 0; b < AXI_DW/8; b++)
      if (strb[b]) r[8*b +: 8] = new_v[8*b +: 8];
    return r;
  endfunction

  function automatic logic [7:0] clamp_sel(logic [7:0] v, int unsigned n);
    return (32'(v) >= n) ? 8'(n - 1) : v;
  endfunction

  logic [AXI_DW-1:0] ctrl_v, delay_v, ctrl_new, delay_new;
  always_comb begin
    ctrl_v    = {29'd0, cfg_mode, cfg_en};
    delay_v   = {16'd0, 8'(cfg_fine), 8'(cfg_coarse)};
    ctrl_new  = apply_strb(ctrl_v, s_axi_wdata, s_axi_wstrb);
    delay_new = apply_strb(delay_v, s_axi_wdata, s_axi_wstrb);
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      cfg_en       <= 1'b0;
      cfg_mode     <= DEFAULT_MODE;
      cfg_coarse   <= '0;
      cfg_fine     <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_bresp  <= AXI_RESP_OKAY;
    end else begin
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_take) begin
        s_axi_bvalid <= 1'b1;
        s_axi_bresp  <= AXI_RESP_OKAY;
        unique case (s_axi_awaddr)
          REG_CTRL: begin
            cfg_en   <= ctrl_new[0];
            cfg_mode <= (ctrl_new[2:1] == 2'd3) ? DEFAULT_MODE : tdc_mode_e'(ctrl_new[2:1]);
          end
          REG_DELAY: begin
            cfg_coarse <= CSEL_W'(clamp_sel(delay_new[7:0], N_COARSE));
            cfg_fine   <= FSEL_W'(clamp_sel(delay_new[15:8], N_FINE));
          end
          default: s_axi_bresp <= AXI_RESP_SLVERR;
        endcase
      end
    end
  end

  // ---------------- Read channel ----------------
  logic rd_take;
  always_comb begin
    rd_take       = s_axi_arvalid && !s_axi_rvalid;
    s_axi_arready = rd_take;
  end

  // Word index of an OUTk address, and whether the address is one.
  logic [AXI_AW-1:0] out_off;
  logic              is_out;
  always_comb begin
    out_off = s_axi_araddr - REG_OUT0;
    is_out  = (s_axi_araddr >= REG_OUT0) && (out_off[1:0] == 2'b00)
              && (32'(out_off >> 2) < N_WORDS);
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      s_axi_rresp  <= AXI_RESP_OKAY;
      rd_hold      <= '0;
      sample_count <= '0;
    end else begin
      if (snap_valid) sample_count <= sample_count + 32'd1;
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_take) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rresp  <= AXI_RESP_OKAY;
        s_axi_rdata  <= '0;
        if (s_axi_araddr == REG_CTRL)       s_axi_rdata <= ctrl_v;
        else if (s_axi_araddr == REG_DELAY) s_axi_rdata <= delay_v;
        else if (s_axi_araddr == REG_INFO)  s_axi_rdata <= INFO_VAL;
        else if (s_axi_araddr == REG_COUNT) s_axi_rdata <= sample_count;
        else if (s_axi_araddr == REG_OUT0) begin
          s_axi_rdata <= snap_wide[AXI_DW-1:0];
          rd_hold     <= snap_wide;
        end else if (is_out)                s_axi_rdata <= rd_hold[32'(out_off >> 2)*AXI_DW +: AXI_DW];
        else                                s_axi_rresp <= AXI_RESP_SLVERR;
      end
    end
  end

  // ---------------- Handshake rules ----------------
  a_bvalid_held: assert property (@(posedge aclk) disable iff (!aresetn)
                                  s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_held: assert property (@(posedge aclk) disable iff (!aresetn)
                                  s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
