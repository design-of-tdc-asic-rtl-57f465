// tb_control_module: checks the calibration sequence and the coarse counter.
//
// A simple generator model answers gen_fire with 8 busy cycles; a
// reconstruction model goes busy one cycle after cal_commit for 19 cycles.
// After reset, and again after each cal_req, the sequencer must: raise
// cal_mode, give one cal_clear, 4 gen_fire pulses each only while the
// generator is idle, one cal_commit after the last pair, stay in calibration
// until the reconstruction is idle, then drop cal_mode and count the
// calibration. The coarse counter must advance by one per clock.
`timescale 1ps/1ps
module tb_control_module;
  logic clk = 0, rst_n = 0, cal_req = 0, gen_busy, recon_busy;
  logic cal_mode, cal_clear, cal_commit, gen_fire;
  logic [21:0] coarse;
  logic [7:0]  cal_count;
  int checks = 0, failures = 0;
  int gen_cnt = 0, rec_cnt = 0, rec_delay = 0;
  int n_fire = 0, n_clear = 0, n_commit = 0, fire_busy = 0, commit_before_done = 0;
  int last_commit_cyc = 0, cyc = 0, cal_end_cyc = 0;

  control_module dut (.*);
  always #5000 clk = ~clk;

  assign gen_busy   = gen_cnt > 0;
  assign recon_busy = rec_cnt > 0;

  always @(posedge clk) begin
    cyc++;
    if (gen_fire && gen_busy) fire_busy++;
    if (gen_fire) begin n_fire++; gen_cnt <= 8; end
    else if (gen_cnt > 0) gen_cnt <= gen_cnt - 1;
    if (cal_clear) n_clear++;
    if (cal_commit) begin
      n_commit++; rec_delay <= 1; last_commit_cyc = cyc;
      if (gen_busy) commit_before_done++;
    end
    if (rec_delay == 1) rec_cnt <= 19;
    else if (rec_cnt > 0) rec_cnt <= rec_cnt - 1;
    if (rec_delay > 0) rec_delay <= rec_delay - 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic one_cal(input int k);
    n_fire = 0; n_clear = 0; n_commit = 0;
    @(negedge cal_mode);
    cal_end_cyc = cyc;
    check(n_fire == 4, $sformatf("fires %0d", n_fire));
    check(n_clear == 1, "one clear");
    check(n_commit == 1, "one commit");
    check(fire_busy == 0, "fire only when idle");
    check(commit_before_done == 0, "commit after last pair");
    check(cal_end_cyc - last_commit_cyc >= 21, $sformatf("waited for reconstruction (%0d)", cal_end_cyc - last_commit_cyc));
    #1 check(int'(cal_count) == k, $sformatf("cal_count %0d", cal_count));
  endtask

  initial begin
    logic [21:0] c0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 check(cal_mode, "calibrating after reset");
    one_cal(1);
    @(negedge clk) c0 = coarse;
    repeat (37) @(negedge clk);
    check(coarse - c0 == 22'd37, "coarse counts clocks");
    repeat (20) @(negedge clk);
    check(!cal_mode, "stays in measurement");
    for (int k = 2; k <= 4; k++) begin
      @(negedge clk) cal_req = 1;
      @(negedge clk) cal_req = 0;
      one_cal(k);
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
