// tb_select_module: exhaustive check of the line-input selector (64 cases).
`timescale 1ps/1ps
module tb_select_module;
  logic cal_mode, ch_en, cal_start, cal_stop, meas_start, meas_stop;
  logic line0_in, line1_in;
  int checks = 0, failures = 0;

  select_module dut (.*);

  initial begin
    for (int v = 0; v < 64; v++) begin
      logic e0, e1;
      {cal_mode, ch_en, cal_start, cal_stop, meas_start, meas_stop} = 6'(v);
      #10;
      e0 = ch_en & (cal_mode ? cal_start : meas_start);
      e1 = ch_en & (cal_mode ? cal_stop  : meas_stop);
      checks++;
      if (line0_in !== e0 || line1_in !== e1) begin
        failures++;
        $display("FAIL v=%b got %b%b want %b%b", 6'(v), line0_in, line1_in, e0, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
