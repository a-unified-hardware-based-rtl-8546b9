// tb_axi_clock_factors: runs the TDC power monitor, at its default sizes,
// with the AXI clock lowered from 10 MHz by factors 1 to 5 (10, 5, 3.33, 2.5
// and 2 MHz) while the sensor clock stays at 150 MHz. For each factor the
// driver sets the delay the reference model predicts to be best, then polls
// a 16-point trace while the modelled accelerator alternates every 5 us
// between idle (1000 mV) and busy (965 mV). Checked: every reading is the
// predicted idle or busy value, both levels appear in each trace, and the
// time a trace takes grows in proportion to the factor, i.e. a slower AXI
// clock gives fewer readings per unit time but the same readings.
module tb_axi_clock_factors;
  timeunit 1fs; timeprecision 1fs;
  import tdc_pkg::*;

  localparam longint S_HALF = 3_333_333;
  localparam longint S_T    = 2 * S_HALF;
  localparam int unsigned TAPS = 128;
  localparam int unsigned LUT_PS = 100, LATCH_PS = 250, MUX_PS = 150, TAP_PS = 15;
  localparam int unsigned N_READS = 16;

  logic sensor_clk = 1'b0, aclk = 1'b0, aresetn = 1'b0;
  logic [7:0]  s_axi_awaddr = '0;  logic s_axi_awvalid = 1'b0; logic s_axi_awready;
  logic [31:0] s_axi_wdata = '0;   logic [3:0] s_axi_wstrb = '0; logic s_axi_wvalid = 1'b0; logic s_axi_wready;
  logic [1:0]  s_axi_bresp;        logic s_axi_bvalid; logic s_axi_bready = 1'b0;
  logic [7:0]  s_axi_araddr = '0;  logic s_axi_arvalid = 1'b0; logic s_axi_arready;
  logic [31:0] s_axi_rdata;        logic [1:0] s_axi_rresp; logic s_axi_rvalid; logic s_axi_rready = 1'b0;
  logic [15:0] vdd_mv = 16'd1000;
  longint a_half = 50_000_000;        // 10 MHz, changed per factor
  bit     accel_on = 1'b0;
  int checks = 0, failures = 0;

  uniguard_tdc dut (.*);

  initial forever begin #(S_HALF) sensor_clk = 1'b1; #(S_HALF) sensor_clk = 1'b0; end
  initial forever begin #(a_half) aclk = ~aclk; end

  // Modelled accelerator: 5 us idle, 5 us busy, while accel_on.
  initial forever begin
    #(64'd5_000_000_000);
    vdd_mv = (accel_on && vdd_mv == 16'd1000) ? 16'd965 : 16'd1000;
  end

  initial begin : watchdog
    #(64'd5_000_000_000_000);   // 5 ms
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge aclk);
    s_axi_awaddr = addr; s_axi_awvalid = 1'b1;
    s_axi_wdata = data;  s_axi_wstrb = 4'hF; s_axi_wvalid = 1'b1; s_axi_bready = 1'b1;
    do @(posedge aclk); while (!(s_axi_awready && s_axi_wready));
    @(negedge aclk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    while (!s_axi_bvalid) @(negedge aclk);
    @(negedge aclk);
    s_axi_bready = 1'b0;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [31:0] data);
    @(negedge aclk);
    s_axi_araddr = addr; s_axi_arvalid = 1'b1; s_axi_rready = 1'b1;
    do @(posedge aclk); while (!s_axi_arready);
    @(negedge aclk);
    s_axi_arvalid = 1'b0;
    while (!s_axi_rvalid) @(negedge aclk);
    data = s_axi_rdata;
    @(negedge aclk);
    s_axi_rready = 1'b0;
  endtask

  task automatic wait_fresh();
    logic [31:0] c0, c;
    axi_read(REG_COUNT, c0);
    do axi_read(REG_COUNT, c); while (c - c0 < 2);
  endtask

  function automatic longint el_fs(int unsigned t_ps, int unsigned v);
    return longint'((t_ps * 1000 * 1000) / v);
  endfunction

  function automatic int predict_sum(int c, int f, int unsigned v);
    longint d, ph;
    int n = 0;
    d = longint'(c + 1) * (el_fs(LUT_PS, v) + el_fs(LATCH_PS, v)) + el_fs(MUX_PS, v)
      + longint'(f + 1) * el_fs(LUT_PS, v) + el_fs(MUX_PS, v);
    for (int i = 0; i < int'(TAPS); i++) begin
      ph = (((S_HALF - d - longint'(i + 1) * el_fs(TAP_PS, v)) % S_T) + S_T) % S_T;
      n += (ph >= S_HALF) ? 1 : 0;
    end
    return n;
  endfunction

  function automatic int abs_i(int x);
    return (x < 0) ? -x : x;
  endfunction

  initial begin
    logic [31:0] d;
    int best_c, best_f, best, idle_sum, busy_sum, n_idle, n_busy;
    longint t0, t_trace [5];
    repeat (4) @(posedge aclk);
    aresetn = 1'b1;
    // Best setting according to the delay model.
    best = -1000; best_c = 0; best_f = 0;
    for (int c = 0; c < 16; c++)
      for (int f = 0; f < 16; f++)
        if (abs_i(predict_sum(c, f, 1000) - 64) < abs_i(best - 64)) begin
          best = predict_sum(c, f, 1000); best_c = c; best_f = f;
        end
    idle_sum = predict_sum(best_c, best_f, 1000);
    busy_sum = predict_sum(best_c, best_f, 965);
    axi_write(REG_DELAY, {16'd0, 8'(best_f), 8'(best_c)});
    axi_write(REG_CTRL, {29'd0, TDC_MODE_SUM, 1'b1});
    for (int factor = 1; factor <= 5; factor++) begin
      accel_on = 1'b0;
      a_half = 50_000_000 * longint'(factor);
      repeat (4) @(posedge aclk);
      wait_fresh();
      accel_on = 1'b1;
      n_idle = 0; n_busy = 0;
      t0 = $time;
      for (int k = 0; k < int'(N_READS); k++) begin
        axi_read(REG_OUT0, d);
        checks++;
        if (abs_i(int'(d) - idle_sum) <= 1) n_idle++;
        else if (abs_i(int'(d) - busy_sum) <= 1) n_busy++;
        else begin
          failures++;
          $display("FAIL factor %0d reading %0d = %0d (idle %0d, busy %0d)", factor, k, d, idle_sum, busy_sum);
        end
        repeat (4) @(posedge aclk);
      end
      t_trace[factor-1] = $time - t0;
      $display("factor %0d: AXI %0d kHz, %0d readings in %0d ns, %0d idle, %0d busy",
               factor, 10000 / factor, N_READS, t_trace[factor-1] / 1_000_000, n_idle, n_busy);
      checks++;
      if (n_idle == 0 || n_busy == 0) begin
        failures++;
        $display("FAIL factor %0d: trace did not see both idle and busy", factor);
      end
      checks++;
      if (factor > 1 && (t_trace[factor-1] * 10 < t_trace[0] * factor * 9 ||
                         t_trace[factor-1] * 10 > t_trace[0] * factor * 11)) begin
        failures++;
        $display("FAIL factor %0d: trace took %0d fs, expected about %0d", factor, t_trace[factor-1], t_trace[0] * factor);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
