// tb_tdc_output_module: checks the output module against a reference model
// kept in this testbench. Random tap words (thermometer codes and arbitrary
// patterns) are applied for many cycles in each output form and with random
// switches of the form and of the enable. Each cycle the testbench predicts
// out_data and out_valid one clock later: the taps, their count, or the
// running sum acc - acc/16 + count, and holds when disabled. It also checks
// the reset values and the one-cycle latency.
module tb_tdc_output_module;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  localparam int unsigned TAPS = 128;
  localparam int unsigned EXP_SHIFT = 4;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            en = 1'b0;
  tdc_mode_e       mode = TDC_MODE_CONCAT;
  logic [TAPS-1:0] taps = '0;
  logic [TAPS-1:0] out_data;
  logic            out_valid;
  int checks = 0, failures = 0;
  int n_mode [3] = '{0, 0, 0};

  tdc_output_module #(.TAPS(TAPS), .EXP_SHIFT(EXP_SHIFT)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model state.
  longint ref_acc = 0;
  logic [TAPS-1:0] ref_out = '0;
  logic ref_valid = 1'b0;

  function automatic logic [TAPS-1:0] rand_taps();
    logic [TAPS-1:0] v;
    int k;
    if ($urandom_range(0, 1) == 0) begin
      k = $urandom_range(0, TAPS);               // thermometer code
      v = '0;
      for (int i = 0; i < int'(TAPS); i++) v[i] = (i < k);
      if ($urandom_range(0, 1) == 0) v = ~v;
    end else begin
      for (int w = 0; w < int'(TAPS / 32); w++) v[32*w +: 32] = $urandom;
    end
    return v;
  endfunction

  initial begin
    longint cnt;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_data != '0 || out_valid != 1'b0) begin
      failures++;
      $display("FAIL reset values");
    end
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // Choose inputs for this cycle.
      if ($urandom_range(0, 99) < 5)  mode = tdc_mode_e'($urandom_range(0, 2));
      en   = ($urandom_range(0, 99) < 90);
      taps = rand_taps();
      if (cyc < 200) begin mode = TDC_MODE_EXPSUM; en = 1'b1; taps = '1; end  // settle run
      // Reference: what the registers will hold after the next edge.
      cnt = 0;
      for (int i = 0; i < int'(TAPS); i++) cnt += longint'(taps[i]);
      ref_valid = en;
      if (en) begin
        ref_acc = ref_acc - (ref_acc >> EXP_SHIFT) + cnt;
        case (mode)
          TDC_MODE_CONCAT: ref_out = taps;
          TDC_MODE_SUM:    ref_out = TAPS'(cnt);
          default:         ref_out = TAPS'(ref_acc);
        endcase
        n_mode[int'(mode)]++;
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_data != ref_out || out_valid != ref_valid) begin
        failures++;
        if (failures < 10)
          $display("FAIL cycle %0d mode %s en %b: out %h valid %b, expected %h %b",
                   cyc, mode.name(), en, out_data, out_valid, ref_out, ref_valid);
      end
      // After the settle run the sum of 128 ones converges to 128*16.
      if (cyc == 199) begin
        checks++;
        if (out_data != TAPS'(128 * 16)) begin
          failures++;
          $display("FAIL exponential sum settled at %0d, expected %0d", out_data, 128 * 16);
        end
      end
    end
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (n_mode[m] == 0) begin
        failures++;
        $display("FAIL mode %0d never exercised", m);
      end
    end
    $display("output module: cycles per mode concat=%0d sum=%0d expsum=%0d", n_mode[0], n_mode[1], n_mode[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
