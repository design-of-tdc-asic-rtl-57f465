// tb_delay_chain: checks the tapped delay-line model.
//
// For three cell delays (53.742, 72.259, 113.863 ps) a rising edge is sent into
// the line and the number of taps that are high is compared, at random
// instants, with floor(elapsed / tau) (limited to the line length); then the
// same for the falling edge. It also checks that the taps form a clean
// thermometer code (all ones before all zeros).
`timescale 1ps/1fs
module tb_delay_chain;
  localparam int N = 189;
  logic         hit = 0;
  logic [N-1:0] taps;
  int checks = 0, failures = 0;

  delay_chain #(.N_TAPS(N)) dut (.hit, .taps);

  function automatic bit is_thermo(input logic [N-1:0] v, input bit ones_first);
    bit seen_other = 0;
    for (int i = 0; i < N; i++) begin
      if (v[i] != ones_first) seen_other = 1;
      else if (seen_other) return 0;
    end
    return 1;
  endfunction

  task automatic run(input real tau);
    real t0;
    dut.tau_ps = tau;
    #30000;
    for (int edge_i = 0; edge_i < 2; edge_i++) begin
      hit = (edge_i == 0);
      t0 = $realtime;
      for (int k = 0; k < 12; k++) begin
        real dt; int want, got;
        #(real'($urandom_range(100, 1800)) + 0.3);
        dt   = $realtime - t0;
        want = int'($floor(dt / tau));
        if (want > N) want = N;
        got  = hit ? $countones(taps) : N - $countones(taps);
        checks++;
        if (got != want || !is_thermo(taps, hit)) begin
          failures++;
          $display("FAIL tau=%0.3f dt=%0.1f got=%0d want=%0d", tau, dt, got, want);
        end
      end
      #30000;
      checks++;
      if (taps != (hit ? {N{1'b1}} : '0)) begin
        failures++;
        $display("FAIL line did not settle");
      end
    end
  endtask

  initial begin
    run(72.259);
    run(113.863);
    run(53.742);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
