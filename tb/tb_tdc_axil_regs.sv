// tb_tdc_axil_regs: checks the AXI4-Lite register block on its own. An
// AXI4-Lite master written here performs writes and reads with random
// back-pressure on the response channels. Checked: reset values, read-back
// of CTRL and DELAY, byte strobes, clamping of out-of-range delay settings,
// the INFO word, the sample counter, coherent reading of a 128-bit output
// (OUT0 latches the sample, later words come from that latch even if new
// samples arrive), SLVERR on unknown or read-only addresses, and the
// configuration outputs towards the sensor.
module tb_tdc_axil_regs;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  localparam int unsigned TAPS = 128, N_COARSE = 16, N_FINE = 16;

  logic aclk = 1'b0, aresetn = 1'b0;
  logic [7:0]  s_axi_awaddr = '0;  logic s_axi_awvalid = 1'b0; logic s_axi_awready;
  logic [31:0] s_axi_wdata = '0;   logic [3:0] s_axi_wstrb = '0; logic s_axi_wvalid = 1'b0; logic s_axi_wready;
  logic [1:0]  s_axi_bresp;        logic s_axi_bvalid; logic s_axi_bready = 1'b0;
  logic [7:0]  s_axi_araddr = '0;  logic s_axi_arvalid = 1'b0; logic s_axi_arready;
  logic [31:0] s_axi_rdata;        logic [1:0] s_axi_rresp; logic s_axi_rvalid; logic s_axi_rready = 1'b0;
  logic        cfg_en;
  tdc_mode_e   cfg_mode;
  logic [3:0]  cfg_coarse, cfg_fine;
  logic [TAPS-1:0] snap_data = '0;
  logic        snap_valid = 1'b0;
  int checks = 0, failures = 0;

  tdc_axil_regs #(.TAPS(TAPS), .N_COARSE(N_COARSE), .N_FINE(N_FINE)) dut (.*);

  always #50_000 aclk = ~aclk;   // 10 MHz

  initial begin : watchdog
    #(64'd5_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data,
                           input logic [3:0] strb, output logic [1:0] resp);
    @(negedge aclk);
    s_axi_awaddr = addr; s_axi_awvalid = 1'b1;
    s_axi_wdata = data;  s_axi_wstrb = strb; s_axi_wvalid = 1'b1;
    do @(posedge aclk); while (!(s_axi_awready && s_axi_wready));
    @(negedge aclk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge aclk);   // back-pressure on B
    s_axi_bready = 1'b1;
    do @(posedge aclk); while (!s_axi_bvalid);
    resp = s_axi_bresp;
    @(negedge aclk);
    s_axi_bready = 1'b0;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [31:0] data,
                          output logic [1:0] resp);
    @(negedge aclk);
    s_axi_araddr = addr; s_axi_arvalid = 1'b1;
    do @(posedge aclk); while (!s_axi_arready);
    @(negedge aclk);
    s_axi_arvalid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge aclk);   // back-pressure on R
    s_axi_rready = 1'b1;
    do @(posedge aclk); while (!s_axi_rvalid);
    data = s_axi_rdata; resp = s_axi_rresp;
    @(negedge aclk);
    s_axi_rready = 1'b0;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, want);
    end
  endtask

  task automatic new_sample(input logic [TAPS-1:0] v);
    @(negedge aclk);
    snap_data = v; snap_valid = 1'b1;
    @(negedge aclk);
    snap_valid = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0]  r;
    logic [TAPS-1:0] s1, s2;
    repeat (3) @(posedge aclk);
    aresetn = 1'b1;
    // Reset values.
    axi_read(REG_CTRL, d, r);  check("CTRL reset", d, {29'd0, TDC_MODE_SUM, 1'b0}); check("CTRL resp", 32'(r), 32'(AXI_RESP_OKAY));
    axi_read(REG_DELAY, d, r); check("DELAY reset", d, 32'd0);
    axi_read(REG_INFO, d, r);  check("INFO", d, {16'd128, 8'd16, 8'd16});
    // CTRL write and configuration outputs.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_EXPSUM, 1'b1}, 4'hF, r); check("CTRL write resp", 32'(r), 32'(AXI_RESP_OKAY));
    axi_read(REG_CTRL, d, r);  check("CTRL readback", d, {29'd0, TDC_MODE_EXPSUM, 1'b1});
    check("cfg_en", 32'(cfg_en), 32'd1); check("cfg_mode", 32'(cfg_mode), 32'(TDC_MODE_EXPSUM));
    // DELAY write, strobes, clamping.
    axi_write(REG_DELAY, 32'h0000_0905, 4'hF, r);
    axi_read(REG_DELAY, d, r); check("DELAY readback", d, 32'h0000_0905);
    check("cfg_coarse", 32'(cfg_coarse), 32'd5); check("cfg_fine", 32'(cfg_fine), 32'd9);
    axi_write(REG_DELAY, 32'h0000_0C00, 4'b0010, r);   // fine only
    axi_read(REG_DELAY, d, r); check("DELAY strobe", d, 32'h0000_0C05);
    axi_write(REG_DELAY, 32'h0000_4020, 4'hF, r);      // both past the end
    axi_read(REG_DELAY, d, r); check("DELAY clamp", d, 32'h0000_0F0F);
    // Random DELAY values.
    for (int k = 0; k < 20; k++) begin
      int c, f;
      c = $urandom_range(0, 40); f = $urandom_range(0, 40);
      axi_write(REG_DELAY, {16'd0, 8'(f), 8'(c)}, 4'hF, r);
      axi_read(REG_DELAY, d, r);
      check("DELAY random", d, {16'd0, 8'((f > 15) ? 15 : f), 8'((c > 15) ? 15 : c)});
    end
    // Errors.
    axi_write(REG_INFO, 32'hFFFF_FFFF, 4'hF, r); check("write to INFO is SLVERR", 32'(r), 32'(AXI_RESP_SLVERR));
    axi_read(REG_INFO, d, r);  check("INFO unchanged", d, {16'd128, 8'd16, 8'd16});
    axi_read(8'h40, d, r);     check("unknown address is SLVERR", 32'(r), 32'(AXI_RESP_SLVERR));
    axi_read(8'h12, d, r);     check("unaligned OUT is SLVERR", 32'(r), 32'(AXI_RESP_SLVERR));
    // Samples and counter.
    axi_read(REG_COUNT, d, r); check("COUNT start", d, 32'd0);
    for (int k = 0; k < 5; k++) begin
      for (int w = 0; w < 4; w++) s1[32*w +: 32] = $urandom;
      new_sample(s1);
    end
    axi_read(REG_COUNT, d, r); check("COUNT after 5", d, 32'd5);
    for (int w = 0; w < 4; w++) s2[32*w +: 32] = $urandom;
    axi_read(REG_OUT0, d, r);  check("OUT0", d, s1[31:0]);
    new_sample(s2);                                     // must not tear the read
    axi_read(8'h14, d, r);     check("OUT1 latched", d, s1[63:32]);
    axi_read(8'h18, d, r);     check("OUT2 latched", d, s1[95:64]);
    axi_read(8'h1C, d, r);     check("OUT3 latched", d, s1[127:96]);
    axi_read(REG_OUT0, d, r);  check("OUT0 new", d, s2[31:0]);
    axi_read(8'h1C, d, r);     check("OUT3 new", d, s2[127:96]);
    axi_read(8'h20, d, r);     check("past OUT3 is SLVERR", 32'(r), 32'(AXI_RESP_SLVERR));
    // Disable.
    axi_write(REG_CTRL, 32'd0, 4'hF, r);
    check("cfg_en off", 32'(cfg_en), 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
