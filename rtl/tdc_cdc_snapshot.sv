// tdc_cdc_snapshot: moves a W-bit value that changes every source clock
// (the TDC output, 150 MHz) into a slower or unrelated destination clock
// domain (the AXI clock) as a series of coherent snapshots.
//
// Toggle handshake: when the source side is idle and src_valid is 1, it
// copies src_data into a holding register and flips req. The destination
// side sees req flip through a two-flip-flop synchroniser, copies the holding
// register (stable by then) into dst_data, pulses dst_valid and flips ack.
// The source side sees ack through its own synchroniser and becomes idle
// again. The holding register never changes while a copy is in flight, so
// every dst_data is one whole sample.
//
// Timing: a new snapshot about every 3 destination plus 3 source cycles;
// samples taken in between are dropped, which is the intent (the reader
// wants the latest value, not every value). Both resets are active low and
// asynchronous to their own clock.
module tdc_cdc_snapshot #(
  parameter int unsigned W = 128
) (
  input  logic         src_clk,
  input  logic         src_rst_n,
  input  logic [W-1:0] src_data,
  input  logic         src_valid,
  input  logic         dst_clk,
  input  logic         dst_rst_n,
  output logic [W-1:0] dst_data,
  output logic         dst_valid
);
  timeunit 1ps; timeprecision 1fs;

  // Source side.
  logic [W-1:0] hold;
  logic         req, ack_s;
  logic         busy;
  always_comb busy = (req != ack_s);

  always_ff @(posedge src_clk or negedge src_rst_n) begin
    if (!src_rst_n) begin
      hold <= '0;
      req  <= 1'b0;
    end else if (!busy && src_valid) begin
      hold <= src_data;
      req  <= ~req;
    end
  end

  // Destination side.
  logic req_s, ack;
  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) begin
      dst_data  <= '0;
      dst_valid <= 1'b0;
      ack       <= 1'b0;
    end else begin
      dst_valid <= 1'b0;
      if (req_s != ack) begin
        dst_data  <= hold;
        dst_valid <= 1'b1;
        ack       <= req_s;
      end
    end
  end

  tdc_sync_bits #(.W(1)) u_req_sync (.clk(dst_clk), .rst_n(dst_rst_n), .d(req), .q(req_s));
  tdc_sync_bits #(.W(1)) u_ack_sync (.clk(src_clk), .rst_n(src_rst_n), .d(ack), .q(ack_s));

  // The holding register must not change while a copy is in flight.
  property p_hold_stable;
    @(posedge src_clk) disable iff (!src_rst_n) busy |=> $stable(hold);
  endproperty
  a_hold_stable: assert property (p_hold_stable);
endmodule
