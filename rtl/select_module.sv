// select_module: input selector in front of the two delay lines of a channel.
//
// In calibration mode the two calibration pulses from the signal generator
// drive delay line 0 (start) and delay line 1 (stop); otherwise the channel's
// measurement start and stop inputs do. A disabled channel drives both lines
// low. The selector sits in the timing path of the hits, so it is purely
// combinational and adds the same gate delay to both lines. The start->line 0,
// stop->line 1 pairing and the enable gate are choices of this design.
`timescale 1ps/1ps
module select_module (
  input  logic cal_mode,
  input  logic ch_en,
  input  logic cal_start,
  input  logic cal_stop,
  input  logic meas_start,
  input  logic meas_stop,
  output logic line0_in,
  output logic line1_in
);
  always_comb begin
    if (!ch_en) begin
      line0_in = 1'b0;
      line1_in = 1'b0;
    end else if (cal_mode) begin
      line0_in = cal_start;
      line1_in = cal_stop;
    end else begin
      line0_in = meas_start;
      line1_in = meas_stop;
    end
  end
endmodule
