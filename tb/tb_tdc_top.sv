// tb_tdc_top: end-to-end test of the four-channel TDC at its default size.
//
// A 100 MHz reference clock with a 40/60 duty cycle drives the PLL model. After
// reset the chip calibrates itself; the test then measures fixed intervals of
// about 1992.35 ns (the order of the pulses used to characterise the chip) on
// all four channels with random sub-period offsets, compares every result with
// the true interval, and repeats this for three delay-cell corners:
// 72.259 ps, 113.863 ps and 53.742 ps. After each change of cell delay it
// first measures without recalibrating (the error must grow: the mechanism
// the compensation removes), then issues a calibration and checks the new
// recorded lengths (round(10 ns / tau) within 1) and the accuracy again. It
// also disables a channel, holds the output stream back so that the FIFO
// fills, and overloads a channel so that the holding register drops results.
// Every mechanism is counted and one that never happened is a failure.
`timescale 1ps/1ps
module tb_tdc_top;
  import tdc_pkg::*;

  localparam real LSB_PS = 10000.0 / 256.0;

  logic            ref_clk = 0, ext_rst_n = 0;
  logic [3:0]      meas_start = 0, meas_stop = 0;
  logic            wr_en = 0;
  logic [3:0]      addr = 0;
  logic [15:0]     wdata = 0, rdata;
  logic            out_valid, out_ready = 1, locked;
  result_t         out_data;

  int checks = 0, failures = 0;
  int n_cal = 0, n_recon = 0, n_keep = 0, n_meas = 0, n_uncomp_err = 0;
  int n_fifo_full = 0, n_disabled = 0, n_lost = 0;

  tdc_top dut (.*);

  // 100 MHz reference, 40% high
  initial forever begin
    #6000 ref_clk = 1;
    #4000 ref_clk = 0;
  end

  // expected results per channel
  real exp_q[4][$];
  real tau_now = 72.259;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic set_tau(input real t);
    tau_now = t;
    dut.g_ch[0].u_ch.u_line0.tau_ps = t; dut.g_ch[0].u_ch.u_line1.tau_ps = t;
    dut.g_ch[1].u_ch.u_line0.tau_ps = t; dut.g_ch[1].u_ch.u_line1.tau_ps = t;
    dut.g_ch[2].u_ch.u_line0.tau_ps = t; dut.g_ch[2].u_ch.u_line1.tau_ps = t;
    dut.g_ch[3].u_ch.u_line0.tau_ps = t; dut.g_ch[3].u_ch.u_line1.tau_ps = t;
  endtask

  task automatic bus_write(input logic [3:0] a, input logic [15:0] d);
    @(negedge dut.clk); wr_en = 1; addr = a; wdata = d;
    @(negedge dut.clk); wr_en = 0;
  endtask

  task automatic bus_read(input logic [3:0] a, output logic [15:0] d);
    @(negedge dut.clk); addr = a; #1; d = rdata;
  endtask

  task automatic wait_cal(input int prev_cnt);
    logic [15:0] d;
    int guard = 0;
    do begin
      bus_read(4'h2, d);
      guard++;
    end while (int'(d[7:0]) == prev_cnt && guard < 2000);
    check(int'(d[7:0]) == prev_cnt + 1, "calibration completed");
    n_cal++;
  endtask

  // Launch one start/stop pair on channel c: start at `off` ps from now,
  // stop `iv` ps later. Pulses are 50 ns wide.
  task automatic pulse_pair(input int c, input real off, input real iv);
    fork
      begin
        #(off); meas_start[c] = 1; #50000; meas_start[c] = 0;
      end
      begin
        #(off + iv); meas_stop[c] = 1; #50000; meas_stop[c] = 0;
      end
    join_none
  endtask

  // collect output
  bit dbg = 0;
  real max_err_round;
  bit  accurate_phase = 1;
  int  n_bad_round = 0;
  always @(posedge dut.clk) begin
    if (dut.rst_n && out_valid && out_ready) begin
      int c;
      real got, want, err;
      c = int'(out_data.ch);
      got = real'(out_data.interval) * LSB_PS;
      if (exp_q[c].size() == 0) begin
        check(0, $sformatf("unexpected result on channel %0d", c));
      end else begin
        want = exp_q[c].pop_front();
        if (dbg) $display("ch%0d got %0.1f want %0.1f", c, got, want);
        err  = got - want; if (err < 0) err = -err;
        if (err > max_err_round) max_err_round = err;
        if (err > 1.5 * tau_now + 100.0) n_bad_round++;
        n_meas++;
      end
    end
  end

  // one measurement round on all enabled channels; returns worst error
  task automatic round(input logic [3:0] en, output real worst, output int bad);
    max_err_round = 0; n_bad_round = 0;
    for (int k = 0; k < 6; k++) begin
      for (int c = 0; c < 4; c++) begin
        real off, iv;
        off = 1000.0 + real'($urandom_range(0, 9999));
        iv  = 1992350.0 + real'($urandom_range(0, 400)) - 200.0;
        pulse_pair(c, off, iv);
        if (en[c]) exp_q[c].push_back(iv);
      end
      #2100000;
    end
    #200000;
    worst = max_err_round; bad = n_bad_round;
    for (int c = 0; c < 4; c++) begin
      check(exp_q[c].size() == 0, $sformatf("all results of channel %0d arrived", c));
      exp_q[c].delete();
    end
  endtask

  task automatic check_len(input real tau, input string tag);
    logic [15:0] d;
    for (int c = 0; c < 4; c++) begin
      int want; int got;
      bus_read(4'(4 + c), d);
      got  = int'(d[7:0]);
      want = int'(10000.0 / tau + 0.5);
      check(got >= want - 1 && got <= want + 1,
            $sformatf("%s: channel %0d length %0d, expected %0d", tag, c, got, want));
    end
  endtask

  real worst; int bad;
  logic [15:0] st;
  initial begin
    set_tau(72.259);
    #100000 ext_rst_n = 1;
    wait (locked);
    check(1, "pll locked");
    wait_cal(0);
    bus_read(4'h1, st);
    if (st[11:8] != 0) n_recon++;
    check(st[7:4] == 4'h0, "no calibration error");
    check_len(72.259, "tt");

    round(4'hF, worst, bad);
    $display("tau 72.259: worst error %0.1f ps", worst);
    check(bad == 0, "accurate after calibration (72.259 ps)");

    // recalibrate at the same temperature: length kept
    bus_write(4'h0, 16'h00F1);
    wait_cal(1);
    bus_read(4'h1, st);
    if (st[11:8] == 4'h0) n_keep++;
    check(st[11:8] == 4'h0, "same temperature keeps the length");

    // heat up: slower cells
    set_tau(113.863);
    round(4'hF, worst, bad);
    $display("tau 113.863 before recalibration: worst error %0.1f ps", worst);
    if (worst > 1000.0) n_uncomp_err++;
    bus_write(4'h0, 16'h00F1);
    wait_cal(2);
    bus_read(4'h1, st);
    if (st[11:8] == 4'hF) n_recon++;
    check(st[11:8] == 4'hF, "length changed on every channel");
    check_len(113.863, "slow");
    round(4'hF, worst, bad);
    $display("tau 113.863 after recalibration: worst error %0.1f ps", worst);
    check(bad == 0, "accurate after calibration (113.863 ps)");

    // cool down: faster cells
    set_tau(53.742);
    round(4'hF, worst, bad);
    $display("tau 53.742 before recalibration: worst error %0.1f ps", worst);
    if (worst > 1000.0) n_uncomp_err++;
    bus_write(4'h0, 16'h00F1);
    wait_cal(3);
    bus_read(4'h1, st);
    if (st[11:8] == 4'hF) n_recon++;
    check_len(53.742, "fast");
    round(4'hF, worst, bad);
    $display("tau 53.742 after recalibration: worst error %0.1f ps", worst);
    check(bad == 0, "accurate after calibration (53.742 ps)");

    // disable channel 2
    bus_write(4'h0, 16'h00B0);
    round(4'hB, worst, bad);
    check(bad == 0, "accurate with channel 2 disabled");
    n_disabled++;
    bus_write(4'h0, 16'h00F0);

    // hold the output back: FIFO fills, then drains
    out_ready = 0;
    for (int k = 0; k < 6; k++) begin
      for (int c = 0; c < 4; c++) begin
        pulse_pair(c, 2000.0, 300000.0 + 1000.0 * c);
        exp_q[c].push_back(300000.0 + 1000.0 * c);
      end
      #700000;
    end
    bus_read(4'h8, st);
    if (st[4:0] == 5'd16) n_fifo_full++;
    check(st[4:0] == 5'd16, "fifo full while output is held");
    bus_read(4'h1, st);
    if (st[15:12] != 0) n_lost++;
    check(st[15:12] == 4'd4, "four results dropped (one per channel)");
    // the dropped ones are the last of each channel
    for (int c = 0; c < 4; c++) void'(exp_q[c].pop_back());
    out_ready = 1;
    #1000000;
    for (int c = 0; c < 4; c++) begin
      check(exp_q[c].size() == 0, "held results drained");
      exp_q[c].delete();
    end

    $display("mechanisms: calibrations=%0d reconstructions=%0d kept=%0d measurements=%0d uncompensated_error=%0d fifo_full=%0d channel_disabled=%0d dropped=%0d",
             n_cal, n_recon, n_keep, n_meas, n_uncomp_err, n_fifo_full, n_disabled, n_lost);
    check(n_cal > 0, "calibration happened");
    check(n_recon > 0, "reconstruction happened");
    check(n_keep > 0, "length kept happened");
    check(n_meas > 0, "measurement happened");
    check(n_uncomp_err > 0, "uncompensated drift seen");
    check(n_fifo_full > 0, "fifo full happened");
    check(n_disabled > 0, "channel disable happened");
    check(n_lost > 0, "drop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
