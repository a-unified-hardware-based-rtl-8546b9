// tdc_sync_bits: two-flip-flop synchroniser for W quasi-static bits entering
// the clock domain of clk. Each bit is synchronised on its own, so a multi-bit
// value must be held stable for a few clk cycles before it is used (the
// configuration fields of the TDC are). Output is valid two clk edges after
// the input settles. The reset value of both ranks is RST_VAL.
module tdc_sync_bits #(
  parameter int unsigned W       = 1,
  parameter logic [W-1:0] RST_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  timeunit 1ps; timeprecision 1fs;

  logic [W-1:0] meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RST_VAL;
      q    <= RST_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
