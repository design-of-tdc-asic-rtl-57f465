// tdc_pkg: constants and types shared by the temperature-compensated TDC.
//
// The numbers that come from the chip description are the delay-line length
// (189 buffer cells), the number of channels (4) and the 100 MHz sampling
// clock. The coarse-counter width, the fine-time unit (one clock period / 256),
// the number of averaged calibration pulse pairs and the shortest accepted
// line length are choices of this implementation.
`timescale 1ps/1ps
package tdc_pkg;
  localparam int N_TAPS        = 189;   // bufx8 cells per delay line
  localparam int N_CH          = 4;     // measurement channels
  localparam int CLK_PERIOD_PS = 10000; // 100 MHz sampling clock
  localparam int TAP_W         = 8;     // holds 0..N_TAPS
  localparam int COARSE_W      = 22;    // coarse clock counter, 41.9 ms range
  localparam int FRAC_W        = 8;     // fine time unit = Tclk / 2**FRAC_W
  localparam int RECIP_W       = 17;    // round(2**(FRAC_W+8) / L)
  localparam int RES_W         = COARSE_W + FRAC_W + 2; // signed interval
  localparam int CAL_AVG_LOG2  = 2;     // 4 calibration pulse pairs
  localparam int L_MIN         = 32;    // shortest accepted effective length
  localparam int CH_W          = 2;

  // One measured interval as it leaves the chip.
  typedef struct packed {
    logic [CH_W-1:0]         ch;
    logic signed [RES_W-1:0] interval;
  } result_t;
endpackage
