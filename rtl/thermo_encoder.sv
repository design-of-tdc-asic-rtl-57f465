// thermo_encoder: tap sampling registers and thermometer-to-binary coder of one
// delay line (the "Reg" row and CMP_DEL_MODULE of the delay-line structure).
//
// Every tap is registered on the rising edge of the 100 MHz clock (row 1), then
// registered once more (row 2, a metastability guard added by this design).
// A new hit is recognised when tap 0 is 1 in the current row-2 word and was 0
// in the previous one, i.e. the edge entered the line during the clock period
// before the sampling edge. For that word the coder counts the ones among the
// first eff_len taps (the effective, reconstructed line length). Counting ones
// rather than looking for the 1->0 transition makes the code insensitive to
// bubbles. The paper specifies the sampling and the thermometer-to-binary
// coding; the second register row, the hit rule and ones-counting are choices
// of this design.
//
// Timing: taps sampled at edge E appear as hit/count right after edge E+2
// (two-cycle latency), one result per clock at most.
`timescale 1ps/1ps
module thermo_encoder #(
  parameter int N_TAPS = tdc_pkg::N_TAPS,
  parameter int TAP_W  = tdc_pkg::TAP_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_TAPS-1:0] taps,     // asynchronous delay-line taps
  input  logic [TAP_W-1:0]  eff_len,  // taps counted, 1..N_TAPS
  output logic              hit,      // one-cycle pulse: new edge sampled
  output logic [TAP_W-1:0]  count     // taps the edge had passed
);
  logic [N_TAPS-1:0] row1, row2;
  logic              prev_tap0;
  logic [N_TAPS-1:0] mask;
  logic [TAP_W-1:0]  ones;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row1      <= '0;
      row2      <= '0;
      prev_tap0 <= 1'b0;
    end else begin
      row1      <= taps;
      row2      <= row1;
      prev_tap0 <= row2[0];
    end
  end

  always_comb begin
    for (int i = 0; i < N_TAPS; i++) mask[i] = (i < int'(eff_len));
    ones = '0;
    for (int i = 0; i < N_TAPS; i++) ones = ones + TAP_W'(row2[i] & mask[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit   <= 1'b0;
      count <= '0;
    end else begin
      hit   <= row2[0] & ~prev_tap0;
      count <= ones;
    end
  end
endmodule
