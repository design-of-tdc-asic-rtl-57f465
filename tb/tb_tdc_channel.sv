// tb_tdc_channel: one channel with its delay lines, driven with exact timing.
//
// The test plays the roles of the control module and the signal generator:
// it sends four calibration pulse pairs (start on a rising clock edge, stop
// 5 ns later), commits, and checks that the recorded length equals
// 2*(floor(10 ns/tau) - floor(5 ns/tau)), the value the line geometry gives.
// It then measures random intervals (0.2 ns .. 3 us) and requires every result
// to lie within 1.5*tau + 100 ps of the true interval. This is done for
// 113.863, 53.742 and 72.259 ps cells, in that order, so the calibration must
// be able to measure a line longer than the recorded one.
`timescale 1ps/1fs
module tb_tdc_channel;
  import tdc_pkg::*;
  logic clk = 0, rst_n = 0, ch_en = 1;
  logic cal_mode = 1, cal_clear = 0, cal_commit = 0, cal_start = 0, cal_stop = 0;
  logic meas_start = 0, meas_stop = 0;
  logic [21:0] coarse = 0;
  logic [7:0]  eff_len;
  logic recon_busy, cal_err, cal_changed, res_valid;
  logic signed [31:0] res_interval;
  int checks = 0, failures = 0;
  real want_q[$];
  real tau_now;

  tdc_channel dut (.*);
  always #5000 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (res_valid) begin
    real got, err;
    got = real'(res_interval) * (10000.0 / 256.0);
    if (want_q.size() == 0) check(0, "unexpected result");
    else begin
      err = got - want_q.pop_front();
      if (err < 0) err = -err;
      check(err <= 1.5 * tau_now + 100.0, $sformatf("tau %0.3f error %0.1f ps", tau_now, err));
    end
  end

  task automatic calibrate(input real tau);
    int want;
    tau_now = tau;
    dut.u_line0.tau_ps = tau; dut.u_line1.tau_ps = tau;
    @(negedge clk) cal_mode = 1;
    repeat (4) @(negedge clk);
    cal_clear = 1;
    @(negedge clk) cal_clear = 0;
    for (int k = 0; k < 4; k++) begin
      @(posedge clk) cal_start = 1;
      #5000 cal_stop = 1;
      #35000 cal_start = 0;
      #5000 cal_stop = 0;
      #40000;
    end
    @(negedge clk) cal_commit = 1;
    @(negedge clk) cal_commit = 0;
    repeat (3) @(negedge clk);
    while (recon_busy) @(negedge clk);
    want = 2 * (int'($floor(10000.0 / tau)) - int'($floor(5000.0 / tau)));
    check(int'(eff_len) == want && !cal_err, $sformatf("length %0d want %0d", eff_len, want));
    @(negedge clk) cal_mode = 0;
  endtask

  task automatic measure(input int n);
    for (int k = 0; k < n; k++) begin
      real off, iv;
      off = real'($urandom_range(0, 9999)) + 0.5;
      iv  = (k % 3 == 0) ? real'($urandom_range(200, 9000)) : real'($urandom_range(20000, 3000000));
      want_q.push_back(iv);
      #(off);
      fork
        begin meas_start = 1; #30000 meas_start = 0; end
        begin #(iv) meas_stop = 1; #30000 meas_stop = 0; end
      join
      #60000;
    end
    #100000;
    check(want_q.size() == 0, "all results arrived");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (recon_busy) @(negedge clk);
    calibrate(113.863);
    measure(25);
    calibrate(53.742);
    measure(25);
    calibrate(72.259);
    measure(25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
