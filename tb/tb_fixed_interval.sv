// tb_fixed_interval: repeated measurement of one fixed interval at three
// temperatures, on the full-size chip.
//
// The chip was characterised by measuring a pulse pair with a fixed spacing of
// about 1992.35 ns many times at 25, 0 and 85 degC, where its resolution was
// 73, 62 and 103 ps. This test sets the delay cells to those three values in
// turn, recalibrates, and measures the same interval 200 times (50 on each
// channel) with a random phase to the clock. It prints a histogram in 50 ps
// bins and requires the mean to be within 40 ps of the true interval, the RMS
// spread to be below one cell delay, and the mean to move by less than
// 60 ps between temperatures (without compensation it would move by
// nanoseconds). The recorded lengths must be round(10 ns / tau) within 1.
`timescale 1ps/1ps
module tb_fixed_interval;
  import tdc_pkg::*;

  localparam real LSB_PS = 10000.0 / 256.0;
  localparam real IV_PS  = 1992350.0;

  logic            ref_clk = 0, ext_rst_n = 0;
  logic [3:0]      meas_start = 0, meas_stop = 0;
  logic            wr_en = 0;
  logic [3:0]      addr = 0;
  logic [15:0]     wdata = 0, rdata;
  logic            out_valid, out_ready = 1, locked;
  result_t         out_data;

  int checks = 0, failures = 0;
  real sum, sumsq;
  int  n;
  int  hist[20];

  tdc_top dut (.*);

  initial forever begin
    #5000 ref_clk = 1;
    #5000 ref_clk = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic set_tau(input real t);
    dut.g_ch[0].u_ch.u_line0.tau_ps = t; dut.g_ch[0].u_ch.u_line1.tau_ps = t;
    dut.g_ch[1].u_ch.u_line0.tau_ps = t; dut.g_ch[1].u_ch.u_line1.tau_ps = t;
    dut.g_ch[2].u_ch.u_line0.tau_ps = t; dut.g_ch[2].u_ch.u_line1.tau_ps = t;
    dut.g_ch[3].u_ch.u_line0.tau_ps = t; dut.g_ch[3].u_ch.u_line1.tau_ps = t;
  endtask

  always @(posedge dut.clk) if (dut.rst_n && out_valid && out_ready) begin
    real v; int b;
    v = real'(out_data.interval) * LSB_PS;
    sum += v; sumsq += v * v; n++;
    b = int'($floor((v - (IV_PS - 500.0)) / 50.0));
    if (b >= 0 && b < 20) hist[b]++;
  end

  task automatic calibrate(input int k);
    logic [15:0] d;
    int guard;
    @(negedge dut.clk) begin wr_en = 1; addr = 0; wdata = 16'h00F1; end
    @(negedge dut.clk) wr_en = 0;
    guard = 0;
    do begin
      @(negedge dut.clk) addr = 4'h2; #1 d = rdata; guard++;
    end while (int'(d[7:0]) != k && guard < 5000);
    check(int'(d[7:0]) == k, "calibration finished");
  endtask

  real means[3];
  initial begin
    real taus[3] = '{73.0, 62.0, 103.0};
    string names[3] = '{"25 degC (73 ps)", "0 degC (62 ps)", "85 degC (103 ps)"};
    #50000 ext_rst_n = 1;
    wait (dut.rst_n);
    // the calibration that follows reset must finish first: a command given
    // while a calibration runs is ignored
    do begin
      logic [15:0] d0;
      @(negedge dut.clk) addr = 4'h2; #1 d0 = rdata;
      if (d0[7:0] == 8'd1) break;
    end while (1);
    for (int t = 0; t < 3; t++) begin
      real mean, rms;
      logic [15:0] d;
      set_tau(taus[t]);
      calibrate(t + 2);
      for (int c = 0; c < 4; c++) begin
        int want;
        @(negedge dut.clk) addr = 4'(4 + c); #1 d = rdata;
        want = int'(10000.0 / taus[t] + 0.5);
        check(int'(d[7:0]) >= want - 1 && int'(d[7:0]) <= want + 1,
              $sformatf("channel %0d length %0d, expected %0d", c, d[7:0], want));
      end
      sum = 0; sumsq = 0; n = 0;
      foreach (hist[i]) hist[i] = 0;
      for (int k = 0; k < 50; k++) begin
        for (int c = 0; c < 4; c++) begin
          automatic int cc = c;
          automatic real off = 1000.0 + real'($urandom_range(0, 9999)) + 0.25 * real'($urandom_range(0, 3));
          fork
            begin #(off) meas_start[cc] = 1; #50000 meas_start[cc] = 0; end
            begin #(off + IV_PS) meas_stop[cc] = 1; #50000 meas_stop[cc] = 0; end
          join_none
        end
        #2100000;
      end
      #200000;
      mean = sum / n;
      rms  = $sqrt(sumsq / n - mean * mean);
      means[t] = mean;
      $display("%s: %0d results, mean %0.2f ns, rms %0.1f ps, recorded length %0d",
               names[t], n, mean / 1000.0, rms, d[7:0]);
      for (int i = 0; i < 20; i++)
        if (hist[i] != 0) $display("  %0.3f ns  %0d", (IV_PS - 500.0 + 50.0 * i) / 1000.0, hist[i]);
      check(n == 200, $sformatf("%0d results", n));
      check(mean > IV_PS - 40.0 && mean < IV_PS + 40.0, $sformatf("mean %0.1f", mean));
      check(rms < taus[t], $sformatf("rms %0.1f", rms));
    end
    check(means[1] - means[0] < 60.0 && means[0] - means[1] < 60.0, "0 degC mean matches 25 degC");
    check(means[2] - means[0] < 60.0 && means[0] - means[2] < 60.0, "85 degC mean matches 25 degC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
