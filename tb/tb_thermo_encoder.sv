// tb_thermo_encoder: checks tap sampling, hit detection, ones counting with the
// effective-length mask, bubble tolerance and the two-cycle latency.
//
// The taps are driven directly. Each case holds the line low for two clocks,
// presents a tap word w for one sampling edge and keeps tap 0 high afterwards
// (the edge has passed). Exactly one hit must follow, two clocks after the
// sampling edge, with count = ones of w among the first eff_len taps.
`timescale 1ps/1ps
module tb_thermo_encoder;
  localparam int N = 189;
  logic         clk = 0, rst_n = 0;
  logic [N-1:0] taps = '0;
  logic [7:0]   eff_len = 8'(N);
  logic         hit;
  logic [7:0]   count;
  int checks = 0, failures = 0;
  int cyc = 0;

  thermo_encoder #(.N_TAPS(N)) dut (.*);

  always #5000 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int ref_count(input logic [N-1:0] w, input int len);
    int s = 0;
    for (int i = 0; i < len && i < N; i++) s += int'(w[i]);
    return s;
  endfunction

  task automatic one_case(input logic [N-1:0] w, input int len);
    int want, sample_cyc, hits = 0, got_count = -1, hit_cyc = -1;
    eff_len = 8'(len);
    @(negedge clk) taps = '0;
    repeat (3) @(negedge clk);
    taps = w;
    @(posedge clk); #1 sample_cyc = cyc;       // sampling edge
    @(negedge clk) taps = {N{1'b1}};
    repeat (5) begin
      @(posedge clk); #1;
      if (hit) begin hits++; got_count = int'(count); hit_cyc = cyc; end
    end
    want = ref_count(w, len);
    checks++;
    if (hits != 1 || got_count != want || hit_cyc != sample_cyc + 2) begin
      failures++;
      $display("FAIL len=%0d hits=%0d count=%0d want=%0d latency=%0d", len, hits, got_count, want, hit_cyc - sample_cyc);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // pure thermometer codes, full length
    for (int k = 1; k <= N; k += 17) one_case((N)'({N{1'b1}}) >> (N - k), N);
    one_case({N{1'b1}}, N);
    // effective length shorter than the edge position
    one_case({N{1'b1}} >> (N - 150), 136);
    one_case({N{1'b1}} >> (N - 100), 136);
    one_case({N{1'b1}} >> (N - 90), 88);
    // bubbles near the transition
    for (int r = 0; r < 20; r++) begin
      logic [N-1:0] w;
      int k, len;
      k = $urandom_range(5, N - 5);
      len = $urandom_range(32, N);
      w = {N{1'b1}} >> (N - k);
      w[k + 1] = 1'b1;
      w[k - 3] = 1'b0;
      one_case(w, len);
    end
    // no new hit while tap 0 stays high
    begin
      int hits = 0;
      taps = {N{1'b1}};
      repeat (10) begin @(posedge clk); #1; hits += int'(hit); end
      checks++;
      if (hits != 0) begin failures++; $display("FAIL spurious hit"); end
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
