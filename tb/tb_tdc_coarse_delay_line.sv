// tb_tdc_coarse_delay_line: checks the coarse delay line model. For every
// MUX setting and three supply voltages it launches a rising and a falling
// edge at clk_in and measures, to the femtosecond, when clk_out follows. The
// expected delay is worked out here from the element delays:
// (sel+1)*(LUT+latch) + MUX, each element scaled by 1000 mV / vdd.
module tb_tdc_coarse_delay_line;
  timeunit 1fs; timeprecision 1fs;

  localparam int unsigned N = 16;
  localparam int unsigned LUT_PS = 100, LATCH_PS = 250, MUX_PS = 150;

  logic        clk_in = 1'b0;
  logic [3:0]  sel = '0;
  logic [15:0] vdd_mv = 16'd1000;
  logic        clk_out;
  int checks = 0, failures = 0;

  tdc_coarse_delay_line dut (.clk_in, .sel, .vdd_mv, .clk_out);

  function automatic longint el_fs(int unsigned t_ps, int unsigned v);
    return longint'((t_ps * 1000 * 1000) / v);
  endfunction

  initial begin : watchdog
    #(64'd50_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned volts [3] = '{1000, 950, 1050};
    longint t0, dt, exp_dt;
    // Fill the chain with a known level.
    #(64'd20_000_000);
    foreach (volts[v]) begin
      vdd_mv = 16'(volts[v]);
      for (int s = 0; s < int'(N); s++) begin
        sel = 4'(s);
        #(64'd20_000_000);
        for (int e = 0; e < 2; e++) begin
          t0 = $time;
          clk_in = ~clk_in;
          @(clk_out);
          dt = $time - t0;
          exp_dt = longint'(s + 1) * (el_fs(LUT_PS, volts[v]) + el_fs(LATCH_PS, volts[v]))
                   + el_fs(MUX_PS, volts[v]);
          checks++;
          if (dt != exp_dt || clk_out != clk_in) begin
            failures++;
            $display("FAIL vdd=%0d sel=%0d edge=%0d: delay %0d fs, expected %0d fs",
                     volts[v], s, e, dt, exp_dt);
          end
          #(64'd20_000_000);
        end
      end
    end
    // A larger supply drop must give a longer delay (sel fixed).
    sel = 4'd7;
    vdd_mv = 16'd1000; #(64'd20_000_000);
    t0 = $time; clk_in = ~clk_in; @(clk_out); dt = $time - t0;
    #(64'd20_000_000);
    vdd_mv = 16'd900;  #(64'd20_000_000);
    t0 = $time; clk_in = ~clk_in; @(clk_out);
    checks++;
    if (!(($time - t0) > dt)) begin
      failures++;
      $display("FAIL delay did not grow when the supply dropped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
