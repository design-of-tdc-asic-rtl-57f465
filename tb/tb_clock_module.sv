// tb_clock_module: checks the PLL model.
//
// A 100 MHz reference with a 30% duty cycle is applied. The output must start
// after the lock count, have a 10 ns period and exactly 5 ns high time, and
// reset must be released two output clocks after lock and follow the reset pin.
`timescale 1ps/1ps
module tb_clock_module;
  logic ref_clk = 0, ext_rst_n = 0, clk, locked, rst_n;
  int checks = 0, failures = 0;
  int ref_edges = 0;

  clock_module dut (.*);

  initial forever begin
    #7000 ref_clk = 1;
    #3000 ref_clk = 0;
  end
  always @(posedge ref_clk) ref_edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    realtime tr, tf, tr2;
    int clk_edges;
    #25000 ext_rst_n = 1;
    @(posedge locked);
    check(ref_edges == 8, $sformatf("lock after %0d reference edges", ref_edges));
    check(!rst_n, "reset held at lock");
    @(posedge clk); @(posedge clk); #1;
    check(rst_n, "reset released after two clocks");
    for (int k = 0; k < 20; k++) begin
      @(posedge clk) tr = $realtime;
      @(negedge clk) tf = $realtime;
      @(posedge clk) tr2 = $realtime;
      check(tf - tr == 5000 && tr2 - tr == 10000, $sformatf("high %0t period %0t", tf - tr, tr2 - tr));
    end
    #3 ext_rst_n = 0;
    #1 check(!rst_n, "reset follows the pin");
    #20000 ext_rst_n = 1;
    @(posedge clk); @(posedge clk); #1;
    check(rst_n, "released again");
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
