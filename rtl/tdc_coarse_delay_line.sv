// tdc_coarse_delay_line: BEHAVIOURAL MODEL of the coarse part of the TDC's
// adjustable initial delay. Not synthesizable as a delay: on an FPGA each stage
// is a placed LUT primitive followed by a transparent latch primitive, and
// their delay is a physical property of the silicon.
//
// The incoming sensor clock passes through N_COARSE stages, each a LUT buffer
// then a latch held transparent. A multiplexer, driven by the control input
// sel, takes the output of stage sel (0 = after the first stage) as clk_out.
// The chain structure, the LUT+latch stages and the MUX follow the paper.
//
// Timing: every element delays both edges by its nominal delay scaled by
// VNOM_MV / vdd_mv, since gate delay is inversely proportional to supply
// voltage. The nominal delays (LUT, latch, MUX) and the number of stages are
// this model's own typical values for a 28 nm FPGA. Delay from clk_in to
// clk_out: (sel+1)*(T_LUT_PS+T_LATCH_PS) + T_MUX_PS, all scaled.
//
// Each element is a transport delay evaluated once at time 0 and then on
// every input change; element delays must stay well below half a clock
// period, so that no element has more than one change pending.
module tdc_coarse_delay_line #(
  parameter int unsigned N_COARSE   = 16,
  parameter int unsigned T_LUT_PS = 100,
  parameter int unsigned T_LATCH_PS = 250,
  parameter int unsigned T_MUX_PS = 150,
  parameter int unsigned VNOM_MV    = 1000,
  localparam int unsigned SEL_W     = $clog2(N_COARSE)
) (
  input  logic             clk_in,
  input  logic [SEL_W-1:0] sel,
  input  logic [15:0]      vdd_mv,
  output logic             clk_out
);
  timeunit 1fs; timeprecision 1fs;  // delays below are in femtoseconds

  // Supply-scaled element delays in fs; a zero supply is treated as nominal.
  logic [15:0] v_mv;
  always_comb v_mv = (vdd_mv == 16'd0) ? 16'(VNOM_MV) : vdd_mv;
  function automatic int unsigned scaled_fs(int unsigned t_ps);
    return (t_ps * 1000 * VNOM_MV) / 32'(v_mv);
  endfunction

  logic [N_COARSE-1:0] lut_o;    // output of the LUT of each stage
  logic [N_COARSE-1:0] latch_o;  // output of the latch of each stage (MUX inputs)

  for (genvar i = 0; i < N_COARSE; i++) begin : g_stage
    if (i == 0) begin : g_first
      always begin lut_o[i] <= #(scaled_fs(T_LUT_PS)) clk_in; @(clk_in); end
    end else begin : g_next
      always begin lut_o[i] <= #(scaled_fs(T_LUT_PS)) latch_o[i-1]; @(latch_o[i-1]); end
    end
    // Transparent latch: gate permanently open, so it only adds delay.
    always begin latch_o[i] <= #(scaled_fs(T_LATCH_PS)) lut_o[i]; @(lut_o[i]); end
  end

  logic mux_in;
  always_comb mux_in = (32'(sel) < N_COARSE) ? latch_o[sel] : latch_o[N_COARSE-1];
  always begin clk_out <= #(scaled_fs(T_MUX_PS)) mux_in; @(mux_in); end
endmodule
