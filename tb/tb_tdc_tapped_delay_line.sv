// tb_tdc_tapped_delay_line: checks the tapped delay line model. The
// testbench runs a 150 MHz sampling clock and feeds the line with the same
// clock delayed by a chosen initial delay D. At each rising edge s the
// expected tap i is the clock level at time s - D - (i+1)*tap, with tap =
// 15 ps scaled by 1000 mV / vdd; the testbench computes that pattern itself
// and compares it with the registered taps one edge later, for several
// initial delays and supply voltages. It also checks that the transition
// moves towards the line input when the supply drops.
module tb_tdc_tapped_delay_line;
  timeunit 1fs; timeprecision 1fs;

  localparam int unsigned N_CARRY4 = 32;
  localparam int unsigned TAPS = 4 * N_CARRY4;
  localparam longint HALF = 3_333_333;       // 150 MHz
  localparam longint T    = 2 * HALF;
  localparam int unsigned TAP_PS = 15;

  logic            clk = 1'b0;
  logic            line_in;
  logic [15:0]     vdd_mv = 16'd1000;
  logic [TAPS-1:0] taps_q;
  longint          d_init = 3_000_000;
  int checks = 0, failures = 0;

  tdc_tapped_delay_line dut (.clk, .line_in, .vdd_mv, .taps_q);

  initial forever begin
    #(HALF) clk = 1'b1;
    #(HALF) clk = 1'b0;
  end
  // line_in(t) = clk(t - d_init), generated from the phase so that any
  // initial delay, even longer than half a period, is exact.
  always begin
    longint ph;
    ph = ((($time - d_init) % T) + T) % T;
    line_in = (ph >= HALF);
    #((ph < HALF) ? (HALF - ph) : (T - ph));
  end

  initial begin : watchdog
    #(64'd200_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected taps sampled at time s; bits too close to a clock edge to call
  // are marked in the returned care mask as don't-care.
  function automatic void expect_taps(longint s, longint d, int unsigned v,
                                      output logic [TAPS-1:0] val,
                                      output logic [TAPS-1:0] care);
    longint tap_fs, u, ph;
    tap_fs = longint'((TAP_PS * 1000 * 1000) / v);
    for (int i = 0; i < int'(TAPS); i++) begin
      u  = s - d - longint'(i + 1) * tap_fs;
      ph = ((u % T) + T) % T;                  // clock is high for ph in [HALF, T)
      val[i]  = (ph >= HALF);
      care[i] = !((ph < 2) || (ph > T - 2) || (ph > HALF - 2 && ph < HALF + 2));
    end
  endfunction

  function automatic int popcount(logic [TAPS-1:0] x);
    int n = 0;
    for (int i = 0; i < int'(TAPS); i++) n += int'(x[i]);
    return n;
  endfunction

  initial begin
    static longint delays [6] = '{3_000_000, 3_500_000, 2_700_000, 6_000_000, 6_500_000, 1_000_000};
    static int unsigned volts [3] = '{1000, 970, 1030};
    logic [TAPS-1:0] ev, ec;
    longint s;
    int n_mid_1000, n_mid_950;
    foreach (delays[di]) begin
      foreach (volts[vi]) begin
        d_init = delays[di];
        vdd_mv = 16'(volts[vi]);
        repeat (4) @(posedge clk);          // let the line settle
        for (int k = 0; k < 4; k++) begin
          @(posedge clk);
          s = $time;
          @(negedge clk);                    // taps_q now holds the sample taken at s
          expect_taps(s, d_init, volts[vi], ev, ec);
          checks++;
          if (((taps_q ^ ev) & ec) != '0) begin
            failures++;
            $display("FAIL D=%0d vdd=%0d: taps %h expected %h", d_init, volts[vi], taps_q, ev);
          end
        end
      end
    end
    // A supply drop moves the edge back along the line: with the rising clock
    // edge inside the line, fewer taps have seen it.
    d_init = 3_000_000;
    vdd_mv = 16'd1000; repeat (4) @(posedge clk); @(negedge clk); n_mid_1000 = popcount(taps_q);
    vdd_mv = 16'd950;  repeat (4) @(posedge clk); @(negedge clk); n_mid_950  = popcount(taps_q);
    checks++;
    if (!(n_mid_950 != n_mid_1000 && n_mid_1000 > 0 && n_mid_1000 < int'(TAPS))) begin
      failures++;
      $display("FAIL supply drop: %0d taps at 1000 mV, %0d at 950 mV", n_mid_1000, n_mid_950);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
