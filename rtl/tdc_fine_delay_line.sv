// tdc_fine_delay_line: BEHAVIOURAL MODEL of the fine part of the TDC's
// adjustable initial delay. Not synthesizable as a delay: on an FPGA each
// element is a placed LUT primitive whose delay is physical.
//
// The output of the coarse line passes through N_FINE LUT buffers; a
// multiplexer, driven by the control input sel, takes the output of LUT sel
// (0 = after the first LUT) as clk_out. The LUT chain and the MUX follow the
// paper; the element delays and the length are this model's own values.
//
// Timing: delay from clk_in to clk_out is (sel+1)*T_LUT_PS + T_MUX_PS,
// scaled by VNOM_MV / vdd_mv (gate delay inversely proportional to voltage).
//
// Each element is a transport delay evaluated once at time 0 and then on
// every input change; element delays must stay well below half a clock
// period, so that no element has more than one change pending.
module tdc_fine_delay_line #(
  parameter int unsigned N_FINE   = 16,
  parameter int unsigned T_LUT_PS = 100,
  parameter int unsigned T_MUX_PS = 150,
  parameter int unsigned VNOM_MV  = 1000,
  localparam int unsigned SEL_W   = $clog2(N_FINE)
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

  logic [N_FINE-1:0] lut_o;  // output of each LUT (MUX inputs)

  for (genvar i = 0; i < N_FINE; i++) begin : g_lut
    if (i == 0) begin : g_first
      always begin lut_o[i] <= #(scaled_fs(T_LUT_PS)) clk_in; @(clk_in); end
    end else begin : g_next
      always begin lut_o[i] <= #(scaled_fs(T_LUT_PS)) lut_o[i-1]; @(lut_o[i-1]); end
    end
  end

  logic mux_in;
  always_comb mux_in = (32'(sel) < N_FINE) ? lut_o[sel] : lut_o[N_FINE-1];
  always begin clk_out <= #(scaled_fs(T_MUX_PS)) mux_in; @(mux_in); end
endmodule
