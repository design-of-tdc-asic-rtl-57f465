// tdc_channel: one measurement channel of the TDC.
//
// The select module feeds either the calibration pulses or the channel's own
// start/stop inputs into delay line 0 (start) and delay line 1 (stop). Each
// line's taps are sampled and coded by a thermo_encoder that counts only the
// first eff_len taps, the effective length kept by line_reconstruction. The
// computation module turns the two tap counts and the shared coarse counter
// into an interval, or during calibration into a new effective length.
// Interface: shared clock, reset, cal_mode/cal_clear/cal_commit from the
// control module, calibration pulses from the signal generator; results leave
// as res_valid/res_interval, one clock after the stop hit is coded (three
// clocks after the sampling edge). During calibration the encoders count the
// whole line, so a length larger than the recorded one can be measured.
`timescale 1ps/1ps
module tdc_channel #(
  parameter int  N_TAPS = tdc_pkg::N_TAPS,
  parameter real TAU_PS = 72.259
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                ch_en,
  input  logic                                cal_mode,
  input  logic                                cal_clear,
  input  logic                                cal_commit,
  input  logic                                cal_start,
  input  logic                                cal_stop,
  input  logic                                meas_start,
  input  logic                                meas_stop,
  input  logic [tdc_pkg::COARSE_W-1:0]        coarse,
  output logic [tdc_pkg::TAP_W-1:0]           eff_len,
  output logic                                recon_busy,
  output logic                                cal_err,
  output logic                                cal_changed,
  output logic                                res_valid,
  output logic signed [tdc_pkg::RES_W-1:0]    res_interval
);
  import tdc_pkg::*;

  logic              line0_in, line1_in;
  logic [N_TAPS-1:0] taps0, taps1;
  logic              hit0, hit1;
  logic [TAP_W-1:0]  count0, count1, enc_len, len_new;
  logic [RECIP_W-1:0] recip;
  logic              len_load;

  select_module u_select (
    .cal_mode, .ch_en, .cal_start, .cal_stop, .meas_start, .meas_stop,
    .line0_in, .line1_in);

  delay_chain #(.N_TAPS(N_TAPS), .TAU_PS(TAU_PS)) u_line0 (.hit(line0_in), .taps(taps0));
  delay_chain #(.N_TAPS(N_TAPS), .TAU_PS(TAU_PS)) u_line1 (.hit(line1_in), .taps(taps1));

  assign enc_len = cal_mode ? TAP_W'(N_TAPS) : eff_len;

  thermo_encoder #(.N_TAPS(N_TAPS)) u_enc0 (
    .clk, .rst_n, .taps(taps0), .eff_len(enc_len), .hit(hit0), .count(count0));
  thermo_encoder #(.N_TAPS(N_TAPS)) u_enc1 (
    .clk, .rst_n, .taps(taps1), .eff_len(enc_len), .hit(hit1), .count(count1));

  line_reconstruction #(.N_TAPS(N_TAPS)) u_recon (
    .clk, .rst_n, .load(len_load), .new_len(len_new), .eff_len, .recip,
    .busy(recon_busy));

  computation_module #(.N_TAPS(N_TAPS)) u_comp (
    .clk, .rst_n, .cal_mode, .cal_clear, .cal_commit, .coarse,
    .hit0, .count0, .hit1, .count1, .eff_len, .recip,
    .len_load, .len_new, .cal_err, .cal_changed, .res_valid, .res_interval);
endmodule
