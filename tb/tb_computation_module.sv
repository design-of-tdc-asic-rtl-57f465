// tb_computation_module: checks the calibration decision and the interval
// arithmetic with encoder results driven directly.
//
// Calibration: four (n0, n1) pairs are given; the new length must be
// round(2*sum(n0-n1)/4), loaded only when it differs from the present one;
// a missing sample or a length outside 32..189 must raise cal_err and load
// nothing. Measurement: random coarse times and tap counts for a start and a
// stop (also in the same cycle, and a stop with no start); the result must be
// (Cstop-Cstart)*256 + f(n0) - f(n1), f(n) = (n*recip + 128) >> 8, one cycle
// after the stop hit.
`timescale 1ps/1ps
module tb_computation_module;
  logic        clk = 0, rst_n = 0;
  logic        cal_mode = 1, cal_clear = 0, cal_commit = 0;
  logic [21:0] coarse = 22'h3FFE00;  // wraps during the measurements
  logic        hit0 = 0, hit1 = 0;
  logic [7:0]  count0 = 0, count1 = 0, eff_len = 8'd189;
  logic [16:0] recip;
  logic        len_load, cal_err, cal_changed, res_valid;
  logic [7:0]  len_new;
  logic signed [31:0] res_interval;
  int checks = 0, failures = 0;
  int loads = 0;
  logic [7:0] last_new;

  computation_module dut (.*);
  always #5000 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;
  always @(posedge clk) if (len_load) begin loads++; last_new <= len_new; end

  assign recip = 17'((2 * 65536 + int'(eff_len)) / (2 * int'(eff_len)));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic calibrate(input int d[4], input bit drop_one, output int loads_seen);
    int l0;
    l0 = loads;
    @(negedge clk) cal_mode = 1; cal_clear = 1;
    @(negedge clk) cal_clear = 0;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      count0 = 8'($urandom_range(100, 189));
      count1 = count0 - 8'(d[k]);
      hit0 = 1; hit1 = !(drop_one && k == 2);
      @(negedge clk) begin hit0 = 0; hit1 = 0; end
      repeat (3) @(negedge clk);
    end
    cal_commit = 1;
    @(negedge clk) cal_commit = 0;
    repeat (3) @(negedge clk);
    loads_seen = loads - l0;
  endtask

  function automatic int fine(input int n, input int l);
    int r;
    r = (2 * 65536 + l) / (2 * l);
    return (n * r + 128) >>> 8;
  endfunction

  initial begin
    int ls, want;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // tt: d = 69 -> L = 138
    calibrate('{69, 69, 70, 69}, 0, ls);
    want = (2 * (69 + 69 + 70 + 69) + 2) / 4;
    check(ls == 1 && last_new == 8'(want) && !cal_err && cal_changed, $sformatf("tt length %0d want %0d", last_new, want));
    eff_len = last_new;
    // same again: no change
    calibrate('{69, 69, 70, 69}, 0, ls);
    check(ls == 0 && !cal_err && !cal_changed, "no reconstruction when equal");
    // slow: d = 44 -> 88
    calibrate('{44, 43, 44, 44}, 0, ls);
    want = (2 * (44 + 43 + 44 + 44) + 2) / 4;
    check(ls == 1 && last_new == 8'(want), $sformatf("slow length %0d want %0d", last_new, want));
    eff_len = last_new;
    // too short: d = 10 -> 20 < 32
    calibrate('{10, 10, 10, 10}, 0, ls);
    check(ls == 0 && cal_err, "short length rejected");
    // too long: d = 100 -> 200 > 189
    calibrate('{100, 100, 100, 100}, 0, ls);
    check(ls == 0 && cal_err, "long length rejected");
    // missing sample
    calibrate('{60, 60, 60, 60}, 1, ls);
    check(ls == 0 && cal_err, "missing sample rejected");
    // fast: 93 -> 186
    calibrate('{93, 93, 93, 93}, 0, ls);
    check(ls == 1 && last_new == 8'd186 && !cal_err, "fast length 186");
    eff_len = 8'd136;

    // measurement
    @(negedge clk) cal_mode = 0;
    for (int k = 0; k < 60; k++) begin
      int gap, n0, n1, cs, ce, exp_iv, got, valid_at, cyc;
      bit same;
      same = (k % 7 == 3);
      gap  = same ? 0 : $urandom_range(1, 300);
      n0   = $urandom_range(0, 136);
      n1   = $urandom_range(0, 136);
      @(negedge clk);
      cs = int'(coarse);
      hit0 = 1; count0 = 8'(n0);
      if (same) begin hit1 = 1; count1 = 8'(n1); end
      @(negedge clk) begin hit0 = 0; hit1 = 0; end
      if (!same) begin
        repeat (gap - 1) @(negedge clk);
        ce = int'(coarse);
        hit1 = 1; count1 = 8'(n1);
        @(negedge clk) hit1 = 0;
      end else ce = cs;
      #1;
      exp_iv = ((ce - cs) & 22'h3FFFFF) * 256 + fine(n0, 136) - fine(n1, 136);
      got = int'(res_interval);
      check(res_valid && got == exp_iv, $sformatf("interval got %0d want %0d (valid %0b)", got, exp_iv, res_valid));
      @(negedge clk);
      check(!res_valid, "single result");
    end
    // stop without start
    @(negedge clk) begin hit1 = 1; count1 = 8'd5; end
    @(negedge clk) hit1 = 0;
    #1 check(!res_valid, "stop without start ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
