// tdc_top: four-channel time-to-digital converter with temperature compensation.
//
// Each channel measures the interval between a rising edge on meas_start[c]
// and a later rising edge on meas_stop[c] with a coarse clock counter plus two
// 189-cell tapped delay lines (fine time). Because the delay of a cell varies
// with temperature, the chip calibrates itself: the signal generator, running
// from the PLL clock, sends two pulses half a clock period apart through the
// delay lines; the computation module derives how many cells make one clock
// period now, and line_reconstruction records that effective length, which
// then scales every fine measurement. Calibration runs after reset and when
// the host writes bit 0 of register 0.
// Interface: ref_clk/ext_rst_n pins, per-channel start/stop inputs (levels,
// each high for at least two clock periods and low long enough for the line to
// clear, about 3 periods), register bus, and the result stream out_* of
// {channel, interval}, interval in units of Tclk/256 = 39.0625 ps.
`timescale 1ps/1ps
module tdc_top #(
  parameter int  N_CH   = tdc_pkg::N_CH,
  parameter int  N_TAPS = tdc_pkg::N_TAPS,
  parameter real TAU_PS = 72.259
) (
  input  logic             ref_clk,
  input  logic             ext_rst_n,
  input  logic [N_CH-1:0]  meas_start,
  input  logic [N_CH-1:0]  meas_stop,
  input  logic             wr_en,
  input  logic [3:0]       addr,
  input  logic [15:0]      wdata,
  output logic [15:0]      rdata,
  output logic             out_valid,
  input  logic             out_ready,
  output tdc_pkg::result_t out_data,
  output logic             locked
);
  import tdc_pkg::*;

  logic clk, rst_n;
  logic cal_req, cal_mode, cal_clear, cal_commit, gen_fire, gen_busy;
  logic cal_start, cal_stop;
  logic [COARSE_W-1:0] coarse;
  logic [7:0]          cal_count;
  logic [N_CH-1:0]     ch_en, recon_busy, cal_err, cal_changed, res_valid;
  logic [N_CH-1:0][TAP_W-1:0] eff_len;
  logic [N_CH-1:0][RES_W-1:0] res_interval;

  clock_module u_clock (.ref_clk, .ext_rst_n, .clk, .locked, .rst_n);

  control_module u_control (
    .clk, .rst_n, .cal_req, .gen_busy, .recon_busy(|recon_busy),
    .cal_mode, .cal_clear, .cal_commit, .gen_fire, .coarse, .cal_count);

  signal_generator u_siggen (
    .clk, .rst_n, .fire(gen_fire), .busy(gen_busy), .cal_start, .cal_stop);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic signed [RES_W-1:0] iv;
    tdc_channel #(.N_TAPS(N_TAPS), .TAU_PS(TAU_PS)) u_ch (
      .clk, .rst_n, .ch_en(ch_en[c]), .cal_mode, .cal_clear, .cal_commit,
      .cal_start, .cal_stop, .meas_start(meas_start[c]), .meas_stop(meas_stop[c]),
      .coarse, .eff_len(eff_len[c]), .recon_busy(recon_busy[c]),
      .cal_err(cal_err[c]), .cal_changed(cal_changed[c]),
      .res_valid(res_valid[c]), .res_interval(iv));
    assign res_interval[c] = iv;
  end

  comm_module #(.N_CH(N_CH)) u_comm (
    .clk, .rst_n, .wr_en, .addr, .wdata, .rdata, .cal_req, .ch_en,
    .cal_mode, .cal_count, .cal_err, .cal_changed, .eff_len,
    .res_valid, .res_interval, .out_valid, .out_ready, .out_data);
endmodule
