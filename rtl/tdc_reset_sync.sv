// tdc_reset_sync: reset synchroniser. The active-low reset arst_n is applied
// at once (asynchronously) and released two rising edges of clk after it is
// deasserted, so logic in the clk domain leaves reset on a clock edge.
module tdc_reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  timeunit 1ps; timeprecision 1fs;

  logic stage;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      stage <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      stage <= 1'b1;
      rst_n <= stage;
    end
  end
endmodule
