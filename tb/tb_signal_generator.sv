// tb_signal_generator: checks the calibration pulse pair.
//
// With a 10 ns clock, every `fire` must give cal_start rising on a rising clock
// edge, cal_stop rising exactly 5 ns later, both 40 ns wide, and `busy` high
// for HOLD+GAP = 8 cycles. A `fire` while busy is ignored.
`timescale 1ps/1ps
module tb_signal_generator;
  logic clk = 0, rst_n = 0, fire = 0, busy, cal_start, cal_stop;
  int checks = 0, failures = 0;
  realtime t_sr, t_sf, t_pr, t_pf;
  int n_start = 0, n_stop = 0;

  signal_generator dut (.*);

  always #5000 clk = ~clk;
  always @(posedge cal_start) begin t_sr = $realtime; n_start++; end
  always @(negedge cal_start) t_sf = $realtime;
  always @(posedge cal_stop)  begin t_pr = $realtime; n_stop++; end
  always @(negedge cal_stop)  t_pf = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 5; p++) begin
      int busy_cycles;
      realtime t_fire_edge;
      busy_cycles = 0;
      repeat ($urandom_range(1, 4)) @(negedge clk);
      fire = 1;
      @(posedge clk) t_fire_edge = $realtime;
      @(negedge clk) fire = (p == 2);      // one extra request while busy
      #1;
      while (busy) begin busy_cycles++; @(negedge clk); #1; end
      fire = 0;
      check(busy_cycles == 8, $sformatf("busy cycles %0d", busy_cycles));
      check(t_sr == t_fire_edge, "start rises on the fire edge");
      check(t_pr - t_sr == 5000, $sformatf("t0 = %0t", t_pr - t_sr));
      check(t_sf - t_sr == 40000, "start width 40 ns");
      check(t_pf - t_pr == 40000, "stop width 40 ns");
    end
    repeat (12) @(negedge clk);
    check(n_start == 5 && n_stop == 5, $sformatf("pairs %0d %0d", n_start, n_stop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
