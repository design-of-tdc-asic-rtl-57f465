// computation_module: calibration decision and interval arithmetic of one channel.
//
// Calibration (cal_mode = 1). The two calibration pulses, t0 = Tclk/2 apart,
// are sampled by delay lines 0 and 1 at the same clock edge, so the difference
// of the two tap counts, d = n0 - n1, is t0 expressed in delay cells. Over
// 2**CAL_AVG_LOG2 pulse pairs the sums of d are accumulated; on cal_commit the
// length that spans one clock period, L = round(2 * mean(d)), is compared with
// the recorded length. (This is the same as comparing the measured value
// t1 = d * 256 / L_recorded with the standard value t0 = 128, i.e. Tclk/2.) If it differs, len_load asks line_reconstruction to take
// it (cal_changed); if it is equal nothing changes. A missing sample or a
// length outside [L_MIN, N_TAPS] sets cal_err and keeps the old length.
//
// Measurement (cal_mode = 0). A hit on line 0 stores its coarse count and fine
// time f = round(n * 256 / L) (via the reciprocal from line_reconstruction). The
// next hit on line 1, in the same or a later cycle, produces
//   interval = (C_stop - C_start) * 256 + f_start - f_stop
// in units of Tclk/256 (two's complement, coarse difference modulo
// 2**COARSE_W). The result is registered: res_valid follows the stop hit by one
// cycle. The encoder latency is the same for both lines and cancels.
// Calibrating against fixed pulses and scaling by the recorded length follow
// the paper; the averaging, the L formula, the coarse/fine arithmetic and the
// error rules are choices of this design.
`timescale 1ps/1ps
module computation_module #(
  parameter int N_TAPS       = tdc_pkg::N_TAPS,
  parameter int TAP_W        = tdc_pkg::TAP_W,
  parameter int COARSE_W     = tdc_pkg::COARSE_W,
  parameter int FRAC_W       = tdc_pkg::FRAC_W,
  parameter int RECIP_W      = tdc_pkg::RECIP_W,
  parameter int RES_W        = tdc_pkg::RES_W,
  parameter int CAL_AVG_LOG2 = tdc_pkg::CAL_AVG_LOG2,
  parameter int L_MIN        = tdc_pkg::L_MIN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cal_mode,
  input  logic                    cal_clear,   // start of a calibration
  input  logic                    cal_commit,  // all pulse pairs sampled
  input  logic [COARSE_W-1:0]     coarse,
  input  logic                    hit0,
  input  logic [TAP_W-1:0]        count0,
  input  logic                    hit1,
  input  logic [TAP_W-1:0]        count1,
  input  logic [TAP_W-1:0]        eff_len,
  input  logic [RECIP_W-1:0]      recip,
  output logic                    len_load,
  output logic [TAP_W-1:0]        len_new,
  output logic                    cal_err,
  output logic                    cal_changed,
  output logic                    res_valid,
  output logic signed [RES_W-1:0] res_interval
);
  localparam int SUM_W = TAP_W + CAL_AVG_LOG2 + 2;
  localparam int FW    = FRAC_W + 3;           // fine time, up to ~4 periods
  localparam int PW    = TAP_W + RECIP_W;

  // ---------------- fine time ----------------
  function automatic logic [FW-1:0] fine(input logic [TAP_W-1:0] n,
                                         input logic [RECIP_W-1:0] r);
    logic [PW-1:0] p;
    p = PW'(n) * PW'(r) + PW'(1 << 7);
    return FW'(p >> 8);
  endfunction

  logic [FW-1:0] f0, f1;
  assign f0 = fine(count0, recip);
  assign f1 = fine(count1, recip);

  // ---------------- calibration ----------------
  logic signed [SUM_W-1:0] sum;
  logic [CAL_AVG_LOG2:0]   nsamp;
  logic                    miss;
  logic signed [SUM_W+1:0] l_meas;

  // L = round(2 * sum / 2**K) = (2*sum + 2**(K-1)) >> K
  always_comb begin
    l_meas = ((SUM_W+2)'(sum) <<< 1) + (SUM_W+2)'((1 << CAL_AVG_LOG2) >> 1);
    l_meas = l_meas >>> CAL_AVG_LOG2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum         <= '0;
      nsamp       <= '0;
      miss        <= 1'b0;
      len_load    <= 1'b0;
      len_new     <= '0;
      cal_err     <= 1'b0;
      cal_changed <= 1'b0;
    end else begin
      len_load <= 1'b0;
      if (cal_clear) begin
        sum         <= '0;
        nsamp       <= '0;
        miss        <= 1'b0;
        cal_changed <= 1'b0;
      end else if (cal_commit) begin
        if (miss || nsamp != (CAL_AVG_LOG2+1)'(1 << CAL_AVG_LOG2) ||
            l_meas < (SUM_W+2)'(L_MIN) || l_meas > (SUM_W+2)'(N_TAPS)) begin
          cal_err <= 1'b1;
        end else begin
          cal_err <= 1'b0;
          if (TAP_W'(l_meas) != eff_len) begin
            len_load    <= 1'b1;
            len_new     <= TAP_W'(l_meas);
            cal_changed <= 1'b1;
          end
        end
      end else if (cal_mode) begin
        if (hit0 && hit1) begin
          sum   <= sum + SUM_W'($signed({1'b0, count0})) - SUM_W'($signed({1'b0, count1}));
          nsamp <= nsamp + 1'b1;
        end else if (hit0 || hit1) begin
          miss <= 1'b1;
        end
      end
    end
  end

  // ---------------- measurement ----------------
  logic                have_start;
  logic [COARSE_W-1:0] c_start;
  logic [FW-1:0]       f_start;
  logic [COARSE_W-1:0] cs_use;
  logic [FW-1:0]       fs_use;
  logic [COARSE_W-1:0] cdiff;

  always_comb begin
    cs_use = hit0 ? coarse : c_start;
    fs_use = hit0 ? f0     : f_start;
    cdiff  = coarse - cs_use;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_start   <= 1'b0;
      c_start      <= '0;
      f_start      <= '0;
      res_valid    <= 1'b0;
      res_interval <= '0;
    end else begin
      res_valid <= 1'b0;
      if (cal_mode) begin
        have_start <= 1'b0;
      end else begin
        if (hit1 && (have_start || hit0)) begin
          res_valid    <= 1'b1;
          res_interval <= $signed({2'b00, cdiff, FRAC_W'(0)})
                        + $signed(RES_W'(fs_use)) - $signed(RES_W'(f1));
          have_start   <= 1'b0;
        end else if (hit0) begin
          have_start <= 1'b1;
          c_start    <= coarse;
          f_start    <= f0;
        end
      end
    end
  end
endmodule
