// tdc_output_module: output stage of the TDC, in the sensor clock domain.
//
// It turns the registered taps of the tapped delay line into the sensor
// output in one of three forms, chosen by mode (the three forms are the
// paper's; their exact definitions here are this design's reading):
//   TDC_MODE_CONCAT  out_data = the taps themselves, concatenated.
//   TDC_MODE_SUM     out_data = number of taps at 1, zero-extended.
//   TDC_MODE_EXPSUM  out_data = acc, where each cycle
//                    acc <= acc - (acc >> EXP_SHIFT) + sum,
//                    an exponentially weighted running sum of the count
//                    (weight of a sample k cycles old: (1 - 2^-EXP_SHIFT)^k;
//                    a steady count s settles to about s * 2^EXP_SHIFT).
// The accumulator runs in every mode, so switching to EXPSUM gives a settled
// value at once.
//
// Interface and timing: one result per clock while en is 1; out_data and
// out_valid are registered, one cycle after taps. While en is 0 the output
// and the accumulator hold and out_valid stays 0. rst_n is asynchronous and
// active low and clears output and accumulator.
module tdc_output_module
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS      = 128,
  parameter int unsigned EXP_SHIFT = 4,
  localparam int unsigned SUM_W    = $clog2(TAPS + 1),
  localparam int unsigned ACC_W    = SUM_W + EXP_SHIFT + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  tdc_mode_e       mode,
  input  logic [TAPS-1:0] taps,
  output logic [TAPS-1:0] out_data,
  output logic            out_valid
);
  timeunit 1ps; timeprecision 1fs;

  // Population count of the taps.
  logic [SUM_W-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < TAPS; i++) sum += SUM_W'(taps[i]);
  end

  // Exponentially weighted running sum.
  logic [ACC_W-1:0] acc, acc_next;
  always_comb acc_next = acc - (acc >> EXP_SHIFT) + ACC_W'(sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        acc <= acc_next;
        unique case (mode)
          TDC_MODE_CONCAT: out_data <= taps;
          TDC_MODE_SUM:    out_data <= TAPS'(sum);
          TDC_MODE_EXPSUM: out_data <= TAPS'(acc_next);
          default:         out_data <= taps;
        endcase
      end
    end
  end
endmodule
