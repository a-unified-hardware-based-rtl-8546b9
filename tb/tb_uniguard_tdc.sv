// tb_uniguard_tdc: end-to-end test of the TDC power monitor at its default
// sizes (16 coarse stages, 16 fine stages, 32 CARRY4 = 128 taps), with the
// 150 MHz sensor clock and the 10 MHz AXI clock of the reference setup.
//
// The testbench plays two outside parts: the processor-side driver, which
// talks to the IP over AXI4-Lite, and the accelerator, whose load it models
// as the supply voltage vdd_mv seen by the sensor. Its reference model
// predicts the sum for any coarse/fine setting and supply from the element
// delays (LUT 100 ps, latch 250 ps, MUX 150 ps, carry bit 15 ps, each scaled
// by 1000 mV / vdd): tap i is the sensor clock level at (rising edge - total
// delay to tap i).
//
// Sequence: read INFO; calibrate by sweeping all coarse and fine settings in
// two nested loops, comparing every reading with the prediction and keeping
// the setting whose sum is nearest the middle of the line; step the supply
// and check the readings follow; switch to the raw and the exponential-sum
// forms and check them; capture a trace while the modelled accelerator
// switches between idle and busy; disable the sensor. Every mechanism is
// counted and must happen at least once.
module tb_uniguard_tdc;
  timeunit 1fs; timeprecision 1fs;
  import tdc_pkg::*;

  localparam longint S_HALF = 3_333_333;       // 150 MHz sensor clock
  localparam longint S_T    = 2 * S_HALF;
  localparam longint A_HALF = 50_000_000;      // 10 MHz AXI clock
  localparam int unsigned TAPS = 128;
  localparam int unsigned LUT_PS = 100, LATCH_PS = 250, MUX_PS = 150, TAP_PS = 15;

  logic sensor_clk = 1'b0, aclk = 1'b0, aresetn = 1'b0;
  logic [7:0]  s_axi_awaddr = '0;  logic s_axi_awvalid = 1'b0; logic s_axi_awready;
  logic [31:0] s_axi_wdata = '0;   logic [3:0] s_axi_wstrb = '0; logic s_axi_wvalid = 1'b0; logic s_axi_wready;
  logic [1:0]  s_axi_bresp;        logic s_axi_bvalid; logic s_axi_bready = 1'b0;
  logic [7:0]  s_axi_araddr = '0;  logic s_axi_arvalid = 1'b0; logic s_axi_arready;
  logic [31:0] s_axi_rdata;        logic [1:0] s_axi_rresp; logic s_axi_rvalid; logic s_axi_rready = 1'b0;
  logic [15:0] vdd_mv = 16'd1000;

  int checks = 0, failures = 0;
  // Mechanism counters.
  int n_cal_points = 0, n_in_line = 0, n_saturated = 0, n_supply_steps = 0;
  int n_concat = 0, n_expsum = 0, n_trace_idle = 0, n_trace_busy = 0, n_disabled = 0;

  uniguard_tdc dut (.*);

  initial forever begin #(S_HALF) sensor_clk = 1'b1; #(S_HALF) sensor_clk = 1'b0; end
  initial forever begin #(A_HALF) aclk = ~aclk; end

  initial begin : watchdog
    #(64'd20_000_000_000_000);   // 20 ms
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite master (driver side) ----------------
  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge aclk);
    s_axi_awaddr = addr; s_axi_awvalid = 1'b1;
    s_axi_wdata = data;  s_axi_wstrb = 4'hF; s_axi_wvalid = 1'b1; s_axi_bready = 1'b1;
    do @(posedge aclk); while (!(s_axi_awready && s_axi_wready));
    @(negedge aclk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    while (!s_axi_bvalid) @(negedge aclk);
    checks++;
    if (s_axi_bresp != AXI_RESP_OKAY) begin failures++; $display("FAIL write %h: resp %b", addr, s_axi_bresp); end
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

  // Wait until the sample counter has moved on by two, so the next read
  // returns a sample taken after any configuration change.
  task automatic wait_fresh();
    logic [31:0] c0, c;
    axi_read(REG_COUNT, c0);
    do axi_read(REG_COUNT, c); while (c - c0 < 2);
  endtask

  task automatic read_out(output logic [TAPS-1:0] v);
    logic [31:0] d;
    for (int w = 0; w < int'(TAPS / 32); w++) begin
      axi_read(REG_OUT0 + 8'(4 * w), d);
      v[32*w +: 32] = d;
    end
  endtask

  // ---------------- Reference model ----------------
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

  task automatic expect_near(input string what, input int got, input int want, input int tol);
    checks++;
    if (abs_i(got - want) > tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, want);
    end
  endtask

  function automatic int popcount(logic [TAPS-1:0] x);
    int n = 0;
    for (int i = 0; i < int'(TAPS); i++) n += int'(x[i]);
    return n;
  endfunction

  // ---------------- Test sequence ----------------
  initial begin
    logic [31:0] d, c0, c1;
    logic [TAPS-1:0] raw;
    int n_coarse, n_fine, n_taps, best_c, best_f, best_sum, best_pred, s, p;
    int idle_sum, busy_sum, trace [64];

    repeat (4) @(posedge aclk);
    aresetn = 1'b1;
    repeat (4) @(posedge aclk);

    axi_read(REG_INFO, d);
    n_coarse = int'(d[7:0]); n_fine = int'(d[15:8]); n_taps = int'(d[31:16]);
    expect_near("INFO coarse", n_coarse, 16, 0);
    expect_near("INFO fine",   n_fine,   16, 0);
    expect_near("INFO taps",   n_taps,   int'(TAPS), 0);

    // Enable, sum form.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_SUM, 1'b1});

    // Calibration: two loops over all coarse and fine settings.
    best_c = 0; best_f = 0; best_sum = -1000;
    for (int c = 0; c < n_coarse; c++) begin
      for (int f = 0; f < n_fine; f++) begin
        axi_write(REG_DELAY, {16'd0, 8'(f), 8'(c)});
        wait_fresh();
        axi_read(REG_OUT0, d);
        s = int'(d);
        p = predict_sum(c, f, 1000);
        expect_near($sformatf("calibration c=%0d f=%0d", c, f), s, p, 1);
        n_cal_points++;
        if (s > 0 && s < int'(TAPS)) n_in_line++; else n_saturated++;
        if (abs_i(s - int'(TAPS) / 2) < abs_i(best_sum - int'(TAPS) / 2)) begin
          best_sum = s; best_c = c; best_f = f;
        end
      end
    end
    // The best reachable setting according to the model.
    best_pred = -1000;
    for (int c = 0; c < 16; c++)
      for (int f = 0; f < 16; f++)
        if (abs_i(predict_sum(c, f, 1000) - int'(TAPS) / 2) < abs_i(best_pred - int'(TAPS) / 2))
          best_pred = predict_sum(c, f, 1000);
    expect_near("calibrated distance from mid-line", abs_i(best_sum - int'(TAPS) / 2),
                abs_i(best_pred - int'(TAPS) / 2), 1);
    $display("calibration: coarse=%0d fine=%0d sum=%0d (%0d settings, %0d inside the line, %0d outside)",
             best_c, best_f, best_sum, n_cal_points, n_in_line, n_saturated);
    axi_write(REG_DELAY, {16'd0, 8'(best_f), 8'(best_c)});
    axi_read(REG_DELAY, d);
    expect_near("DELAY readback", int'(d), int'({16'd0, 8'(best_f), 8'(best_c)}), 0);

    // Supply steps: the reading follows the modelled supply.
    begin
      static int unsigned volts [5] = '{1000, 990, 980, 960, 1020};
      int prev;
      prev = -1;
      foreach (volts[k]) begin
        vdd_mv = 16'(volts[k]);
        wait_fresh();
        axi_read(REG_OUT0, d);
        s = int'(d);
        expect_near($sformatf("sum at %0d mV", volts[k]), s, predict_sum(best_c, best_f, volts[k]), 1);
        if (prev >= 0 && s != prev) n_supply_steps++;
        prev = s;
      end
      vdd_mv = 16'd1000;
    end

    // Raw (concatenated) form: a thermometer code with the predicted count.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_CONCAT, 1'b1});
    wait_fresh();
    read_out(raw);
    expect_near("raw taps count", popcount(raw), predict_sum(best_c, best_f, 1000), 1);
    begin
      int edges = 0;
      for (int i = 1; i < int'(TAPS); i++) edges += (raw[i] != raw[i-1]) ? 1 : 0;
      checks++;
      if (edges > 1) begin failures++; $display("FAIL raw taps not a thermometer code: %h", raw); end
    end
    n_concat++;

    // Exponential-sum form: settles to about 16 times the count.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_EXPSUM, 1'b1});
    wait_fresh();
    axi_read(REG_OUT0, d);
    p = predict_sum(best_c, best_f, 1000);
    checks++;
    if (!(int'(d) >= 16 * (p - 1) && int'(d) <= 16 * (p + 1) + 15)) begin
      failures++;
      $display("FAIL exponential sum %0d for a count of %0d", d, p);
    end
    n_expsum++;

    // Trace capture: the modelled accelerator alternates 20 us idle / 20 us
    // busy (supply 1000 mV / 965 mV); the driver polls the sum.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_SUM, 1'b1});
    wait_fresh();
    idle_sum = predict_sum(best_c, best_f, 1000);
    busy_sum = predict_sum(best_c, best_f, 965);
    fork
      begin : accelerator
        repeat (3) begin
          vdd_mv = 16'd1000; #(64'd20_000_000_000);
          vdd_mv = 16'd965;  #(64'd20_000_000_000);
        end
        vdd_mv = 16'd1000;
      end
      begin : driver
        for (int k = 0; k < 64; k++) begin
          axi_read(REG_OUT0, d);
          trace[k] = int'(d);
          repeat (10) @(posedge aclk);
        end
      end
    join
    foreach (trace[k]) begin
      checks++;
      if (abs_i(trace[k] - idle_sum) <= 1) n_trace_idle++;
      else if (abs_i(trace[k] - busy_sum) <= 1) n_trace_busy++;
      else begin failures++; $display("FAIL trace sample %0d = %0d (idle %0d, busy %0d)", k, trace[k], idle_sum, busy_sum); end
    end
    $display("trace: %0d idle samples, %0d busy samples (idle sum %0d, busy sum %0d)",
             n_trace_idle, n_trace_busy, idle_sum, busy_sum);

    // Disable: the sample counter stops.
    axi_write(REG_CTRL, {29'd0, TDC_MODE_SUM, 1'b0});
    repeat (10) @(posedge aclk);
    axi_read(REG_COUNT, c0);
    repeat (20) @(posedge aclk);
    axi_read(REG_COUNT, c1);
    checks++;
    if (c1 != c0) begin failures++; $display("FAIL counter moved while disabled"); end
    else n_disabled++;

    // Every mechanism must have happened.
    begin
      int counts [9];
      string names [9];
      counts = '{n_cal_points, n_in_line, n_saturated, n_supply_steps, n_concat, n_expsum,
                 n_trace_idle, n_trace_busy, n_disabled};
      names  = '{"calibration points", "edge inside line", "edge outside line", "supply-step responses",
                 "raw reads", "exponential-sum reads", "idle trace samples", "busy trace samples",
                 "disable"};
      foreach (counts[k]) begin
        $display("mechanism %-24s %0d", names[k], counts[k]);
        checks++;
        if (counts[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
