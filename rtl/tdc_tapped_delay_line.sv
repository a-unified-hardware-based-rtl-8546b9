// tdc_tapped_delay_line: BEHAVIOURAL MODEL of the TDC's tapped delay line.
// The carry chain is not synthesizable as a delay: on an FPGA it is a column
// of CARRY4 primitives whose per-bit delay is physical. The tap flip-flops are
// ordinary registers and are written as such.
//
// The delayed clock from the fine line enters a chain of N_CARRY4 CARRY4
// elements, 4 carry bits each, TAPS = 4*N_CARRY4 taps in all. Tap i (CO bit
// i mod 4 of CARRY4 number i/4) is the chain input delayed by (i+1) carry
// bits. Every tap is registered by its own D flip-flop on the rising edge of
// the sensor clock clk, four flip-flops per CARRY4 as in the paper. At that
// edge the flip-flops hold a thermometer code: the taps the clock edge has
// reached show the new level, the rest the old one. A drop of vdd_mv slows
// the whole path, so the transition moves towards the chain input.
//
// Timing: each carry bit delays by T_TAP_PS * VNOM_MV / vdd_mv. taps_q
// holds the chain state captured at the last rising edge of clk. The number
// of CARRY4 and the tap delay are this model's own values. Each element is a
// transport delay evaluated once at time 0 and then on every input change;
// keep element delays well below half a clock period, so that no element has
// more than one change pending.
module tdc_tapped_delay_line #(
  parameter int unsigned N_CARRY4 = 32,
  parameter int unsigned T_TAP_PS = 15,
  parameter int unsigned VNOM_MV  = 1000,
  localparam int unsigned TAPS    = 4 * N_CARRY4
) (
  input  logic            clk,
  input  logic            line_in,
  input  logic [15:0]     vdd_mv,
  output logic [TAPS-1:0] taps_q
);
  timeunit 1fs; timeprecision 1fs;  // delays below are in femtoseconds

  // Supply-scaled element delays in fs; a zero supply is treated as nominal.
  logic [15:0] v_mv;
  always_comb v_mv = (vdd_mv == 16'd0) ? 16'(VNOM_MV) : vdd_mv;
  function automatic int unsigned scaled_fs(int unsigned t_ps);
    return (t_ps * 1000 * VNOM_MV) / 32'(v_mv);
  endfunction

  logic [TAPS-1:0] co;  // carry outputs of the whole chain

  for (genvar i = 0; i < TAPS; i++) begin : g_bit
    if (i == 0) begin : g_first
      always begin co[i] <= #(scaled_fs(T_TAP_PS)) line_in; @(line_in); end
    end else begin : g_next
      always begin co[i] <= #(scaled_fs(T_TAP_PS)) co[i-1]; @(co[i-1]); end
    end
  end

  // Four dedicated D flip-flops per CARRY4, i.e. one per tap.
  always_ff @(posedge clk) taps_q <= co;
endmodule
