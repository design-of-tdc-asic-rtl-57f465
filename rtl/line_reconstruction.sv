// line_reconstruction: records the effective length of a channel's delay lines.
//
// The calibration decides how many delay cells make up one clock period at the
// present temperature; this block keeps that number (eff_len) and drives the
// encoders, which count only the first eff_len taps. It also provides
// recip = round(2**16 / eff_len), with which the computation module turns a tap
// count n into fine time n*256/eff_len (units of Tclk/256). The reciprocal is
// computed by an 18-step restoring divider after every `load` and once after
// reset; `busy` is high meanwhile (19 cycles). After reset the length is the
// whole line (N_TAPS). Keeping and reporting the length follows the paper; the
// reset value and the reciprocal arithmetic are choices of this design.
`timescale 1ps/1ps
module line_reconstruction #(
  parameter int N_TAPS  = tdc_pkg::N_TAPS,
  parameter int TAP_W   = tdc_pkg::TAP_W,
  parameter int RECIP_W = tdc_pkg::RECIP_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [TAP_W-1:0]   new_len,
  output logic [TAP_W-1:0]   eff_len,
  output logic [RECIP_W-1:0] recip,
  output logic               busy
);
  localparam int DIVW = 18;                 // dividend 2**17
  logic [DIVW-1:0] quo;                     // shifts in quotient bits
  logic [TAP_W:0]  rem;
  logic [4:0]      step;
  logic [TAP_W+1:0] trial;

  assign trial = {rem, quo[DIVW-1]} - {2'b00, eff_len};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eff_len <= TAP_W'(N_TAPS);
      recip   <= '0;
      busy    <= 1'b1;
      quo     <= DIVW'(1) << 17;
      rem     <= '0;
      step    <= '0;
    end else if (load) begin
      eff_len <= new_len;
      busy    <= 1'b1;
      quo     <= DIVW'(1) << 17;
      rem     <= '0;
      step    <= '0;
    end else if (busy) begin
      if (step == 5'(DIVW)) begin
        // quo = floor(2**17 / L); round(2**16 / L) = (quo + 1) >> 1
        recip <= RECIP_W'((quo + 1'b1) >> 1);
        busy  <= 1'b0;
      end else begin
        if (!trial[TAP_W+1]) begin
          rem <= trial[TAP_W:0];
          quo <= {quo[DIVW-2:0], 1'b1};
        end else begin
          rem <= {rem[TAP_W-1:0], quo[DIVW-1]};
          quo <= {quo[DIVW-2:0], 1'b0};
        end
        step <= step + 1'b1;
      end
    end
  end
endmodule
