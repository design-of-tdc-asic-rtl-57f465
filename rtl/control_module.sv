// control_module: chip sequencer and coarse counter.
//
// The coarse counter counts 100 MHz clock periods and gives every hit its
// coarse time stamp. The sequencer runs a calibration after reset and whenever
// the host writes the calibration command:
//   FLUSH  cal_mode=1, cal_clear pulse, wait FLUSH_CYCLES for lines and
//          encoders to empty;
//   FIRE   one-cycle `gen_fire` to the signal generator;
//   WAIT   until the generator is idle; repeat FIRE for 2**CAL_AVG_LOG2 pairs;
//   COMMIT one-cycle cal_commit: each channel decides on its new length;
//   UPDATE wait until every line_reconstruction is idle again;
//   MEAS   cal_mode=0, measurements run until the next command.
// cal_count counts completed calibrations. The paper names the control module;
// this sequence and the placement of the coarse counter are this design's.
`timescale 1ps/1ps
module control_module #(
  parameter int COARSE_W     = tdc_pkg::COARSE_W,
  parameter int CAL_AVG_LOG2 = tdc_pkg::CAL_AVG_LOG2,
  parameter int FLUSH_CYCLES = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cal_req,
  input  logic                gen_busy,
  input  logic                recon_busy,   // OR of all channels
  output logic                cal_mode,
  output logic                cal_clear,
  output logic                cal_commit,
  output logic                gen_fire,
  output logic [COARSE_W-1:0] coarse,
  output logic [7:0]          cal_count
);
  typedef enum logic [2:0] {S_FLUSH, S_FIRE, S_WAIT, S_SETTLE, S_COMMIT, S_UPDATE, S_MEAS} cstate_e;
  cstate_e state;
  logic [7:0]            cnt;
  logic [CAL_AVG_LOG2:0] pairs;
  logic                  entered;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_FLUSH;
      cnt       <= '0;
      pairs     <= '0;
      entered   <= 1'b0;
      cal_count <= '0;
    end else begin
      entered <= 1'b0;
      case (state)
        S_FLUSH: begin
          pairs <= '0;
          if (cnt == 8'(FLUSH_CYCLES - 1)) begin
            cnt   <= '0;
            state <= S_FIRE;
          end else cnt <= cnt + 1'b1;
        end
        S_FIRE: state <= S_WAIT;
        S_WAIT: if (!gen_busy) begin
          if (pairs == (CAL_AVG_LOG2+1)'((1 << CAL_AVG_LOG2) - 1)) state <= S_SETTLE;
          else                                                     state <= S_FIRE;
          pairs <= pairs + 1'b1;
        end
        S_SETTLE: state <= S_COMMIT;
        S_COMMIT: begin
          state   <= S_UPDATE;
          entered <= 1'b1;
        end
        S_UPDATE: if (!entered && !recon_busy) begin
          state     <= S_MEAS;
          cal_count <= cal_count + 1'b1;
        end
        S_MEAS: if (cal_req) begin
          state <= S_FLUSH;
          cnt   <= '0;
        end
        default: state <= S_MEAS;
      endcase
    end
  end

  assign cal_mode   = (state != S_MEAS);
  assign gen_fire   = (state == S_FIRE);
  assign cal_commit = (state == S_COMMIT);
  assign cal_clear  = (state == S_FLUSH) && (cnt == '0);
endmodule
