// tb_line_reconstruction: checks the recorded length and its reciprocal.
//
// After reset the length must be 189 and, once busy drops, recip =
// round(65536/189). Then random lengths 32..189 are loaded; for each, busy must
// last exactly 19 cycles and recip must equal round(65536/L), computed here in
// integer arithmetic as (2*65536 + L) / (2*L).
`timescale 1ps/1ps
module tb_line_reconstruction;
  logic        clk = 0, rst_n = 0, load = 0, busy;
  logic [7:0]  new_len, eff_len;
  logic [16:0] recip;
  int checks = 0, failures = 0;

  line_reconstruction dut (.*);
  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int ref_recip(input int l);
    return (2 * 65536 + l) / (2 * l);
  endfunction

  initial begin
    new_len = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(eff_len == 8'd189, "reset length 189");
    while (busy) @(negedge clk);
    check(int'(recip) == ref_recip(189), $sformatf("recip(189)=%0d", recip));
    for (int k = 0; k < 40; k++) begin
      int l, cyc;
      cyc = 0;
      l = (k < 3) ? (k == 0 ? 32 : (k == 1 ? 136 : 88)) : $urandom_range(32, 189);
      @(negedge clk) begin load = 1; new_len = 8'(l); end
      @(negedge clk) load = 0;
      while (busy) begin cyc++; @(negedge clk); end
      check(eff_len == 8'(l), "length recorded");
      check(cyc == 19, $sformatf("busy %0d cycles", cyc));
      check(int'(recip) == ref_recip(l), $sformatf("recip(%0d)=%0d want %0d", l, recip, ref_recip(l)));
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
