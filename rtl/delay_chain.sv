// delay_chain: behavioural model of one tapped delay line (not synthesizable).
//
// The real line is a chain of N_TAPS bufx8 standard cells; each cell output is a
// tap that the sampling registers of thermo_encoder read. A rising edge on
// `hit` reaches tap i after (i+1)*tau_ps. The cell delay depends on process,
// voltage and temperature; the model keeps it in the variable tau_ps
// (picoseconds), which starts at TAU_PS and may be changed by a testbench to
// emulate a temperature change. The time precision is 1 fs so that cell
// delays such as 72.259 ps are not rounded. The cell delays listed for this line are
// 53.742 ps, 72.259 ps (typical, the default) and 113.863 ps. Delays are
// transport delays, so every edge travels the whole line.
`timescale 1ps/1fs
module delay_chain #(
  parameter int  N_TAPS = tdc_pkg::N_TAPS,
  parameter real TAU_PS = 72.259
) (
  input  logic              hit,
  output logic [N_TAPS-1:0] taps
);
  real tau_ps = TAU_PS;

  initial taps = '0;

  always @(hit) taps[0] <= #(tau_ps) hit;

  for (genvar i = 1; i < N_TAPS; i++) begin : g_cell
    always @(taps[i-1]) taps[i] <= #(tau_ps) taps[i-1];
  end
endmodule
