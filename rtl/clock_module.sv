// clock_module: behavioural model of the on-chip PLL and reset release (not
// synthesizable).
//
// The PLL regenerates the system clock from the Clock pin: it measures the
// reference period between rising edges and, once it has seen LOCK_CYCLES
// edges, produces MULT clock periods per reference period, aligned to the
// reference rising edge, each with an exact 50% duty cycle. The exact duty
// cycle matters: the calibration interval is half a clock period. `locked`
// rises with the first output edge; rst_n is the Reset pin, released two
// rising edges of the output clock after lock (a two-flop synchroniser), and
// asserted at once when the pin goes low. MULT = 1 (100 MHz in and out) is a
// choice of this model; the chip description only states that a PLL makes
// the clock and the temperature-independent calibration pulses.
`timescale 1ps/1ps
module clock_module #(
  parameter int MULT        = 1,
  parameter int LOCK_CYCLES = 8
) (
  input  logic ref_clk,
  input  logic ext_rst_n,
  output logic clk,
  output logic locked,
  output logic rst_n
);
  realtime last_edge, period;
  int      edges;
  logic [1:0] sync;

  initial begin
    clk       = 1'b0;
    locked    = 1'b0;
    last_edge = 0;
    period    = 0;
    edges     = 0;
  end

  always @(posedge ref_clk) begin
    if (edges > 0) period = $realtime - last_edge;
    last_edge = $realtime;
    if (edges < LOCK_CYCLES) edges = edges + 1;
    if (edges >= LOCK_CYCLES && period > 0) begin
      locked = 1'b1;
      for (int k = 0; k < MULT; k++) begin
        clk = 1'b1;
        #(period / (2.0 * MULT));
        clk = 1'b0;
        if (k < MULT - 1) #(period / (2.0 * MULT));
      end
    end
  end

  always @(posedge clk or negedge ext_rst_n) begin
    if (!ext_rst_n) sync <= 2'b00;
    else            sync <= {sync[0], locked};
  end

  initial sync = 2'b00;
  assign rst_n = sync[1];
endmodule
