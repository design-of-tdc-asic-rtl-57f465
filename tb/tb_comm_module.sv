// tb_comm_module: checks the register map and the result path.
//
// Registers: channel enables (reset 4'hF, write/read back), the one-cycle
// calibration request, status bits, calibration count and the four recorded
// lengths. Results: random bursts in which several channels report in the same
// cycle, with random back-pressure on out_ready; every result must come out
// once, with its channel number and value, in order per channel. Finally the
// output is held until the FIFO (16) and the holding registers (4) are full;
// further results must be counted as lost and the stream must keep its data
// stable while out_ready is low (checked by the module's assertion too).
`timescale 1ps/1ps
module tb_comm_module;
  import tdc_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0]  addr = 0;
  logic [15:0] wdata = 0, rdata;
  logic        cal_req, cal_mode = 0;
  logic [3:0]  ch_en, cal_err = 4'b0101, cal_changed = 4'b0011;
  logic [7:0]  cal_count = 8'd7;
  logic [3:0][7:0]  eff_len = {8'd186, 8'd88, 8'd138, 8'd136};
  logic [3:0]       res_valid = 0;
  logic [3:0][31:0] res_interval = '0;
  logic        out_valid, out_ready = 1;
  result_t     out_data;
  int checks = 0, failures = 0;
  int n_req = 0;
  logic [31:0] exp_q[4][$];
  int n_out = 0;

  comm_module dut (.*);
  always #5000 clk = ~clk;
  always @(posedge clk) if (rst_n && cal_req) n_req++;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int c;
    c = int'(out_data.ch);
    checks++;
    n_out++;
    if (exp_q[c].size() == 0 || exp_q[c][0] != 32'(out_data.interval)) begin
      failures++;
      $display("FAIL channel %0d got %0d", c, out_data.interval);
    end else void'(exp_q[c].pop_front());
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rd(input logic [3:0] a, output logic [15:0] d);
    @(negedge clk) addr = a; #1 d = rdata;
  endtask

  initial begin
    logic [15:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(ch_en == 4'hF, "enables after reset");
    rd(4'h0, d); check(d[7:4] == 4'hF, "read enables");
    @(negedge clk) begin wr_en = 1; addr = 0; wdata = 16'h00A0; end
    @(negedge clk) wr_en = 0;
    check(ch_en == 4'hA && n_req == 0, "write enables without calibration");
    @(negedge clk) begin wr_en = 1; addr = 0; wdata = 16'h00F1; end
    @(negedge clk) wr_en = 0;
    repeat (2) @(negedge clk);
    check(ch_en == 4'hF && n_req == 1, "calibration request is one pulse");
    rd(4'h1, d); check(d[0] == 0 && d[7:4] == 4'b0101 && d[11:8] == 4'b0011 && d[15:12] == 0, "status");
    rd(4'h2, d); check(d[7:0] == 8'd7, "cal count");
    for (int c = 0; c < 4; c++) begin
      rd(4'(4 + c), d); check(d[7:0] == eff_len[c], $sformatf("length %0d", c));
    end
    // random traffic with back-pressure
    fork
      begin
        for (int k = 0; k < 300; k++) begin
          @(negedge clk);
          res_valid = '0;
          if (k % 4 == 0) begin
            for (int c = 0; c < 4; c++) if ($urandom_range(0, 1) != 0) begin
              res_valid[c]    = 1;
              res_interval[c] = 32'($urandom);
              exp_q[c].push_back(res_interval[c]);
            end
          end
        end
        @(negedge clk) res_valid = '0;
      end
      begin
        for (int k = 0; k < 320; k++) @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
        out_ready = 1;
      end
    join
    repeat (30) @(negedge clk);
    for (int c = 0; c < 4; c++) check(exp_q[c].size() == 0, $sformatf("channel %0d drained", c));
    rd(4'h1, d); check(d[15:12] == 0, "nothing lost");
    // overflow
    out_ready = 0;
    for (int k = 0; k < 6; k++) begin
      @(negedge clk) begin res_valid = '1; for (int c = 0; c < 4; c++) res_interval[c] = 32'(k * 4 + c); end
      if (k < 5) for (int c = 0; c < 4; c++) exp_q[c].push_back(32'(k * 4 + c));
      @(negedge clk) res_valid = '0;
      repeat (3) @(negedge clk);
    end
    rd(4'h8, d); check(d[4:0] == 5'd16, $sformatf("fifo level %0d", d[4:0]));
    rd(4'h1, d); check(d[15:12] == 4'd4, $sformatf("lost %0d", d[15:12]));
    out_ready = 1;
    repeat (40) @(negedge clk);
    for (int c = 0; c < 4; c++) check(exp_q[c].size() == 0, $sformatf("channel %0d drained after overflow", c));
    check(n_out > 100, "results flowed");
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
