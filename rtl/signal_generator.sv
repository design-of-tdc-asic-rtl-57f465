// signal_generator: calibration pulse pair whose spacing does not depend on
// temperature.
//
// On `fire` (sampled on a rising clock edge while idle) cal_start rises at that
// rising edge and stays high for HOLD_CYCLES clock periods. cal_stop is cal_start
// re-registered on the falling edge, so it rises exactly half a clock period
// later: the calibration interval t0 = Tclk/2 = 5 ns is fixed by the PLL's
// period and duty cycle, not by the delay cells. After the pulses the
// generator waits GAP_CYCLES periods so the delay lines can clear; `busy` is
// high from the cycle after `fire` until then. The use of the falling edge to
// make t0, and the pulse and gap lengths, are choices of this design.
`timescale 1ps/1ps
module signal_generator #(
  parameter int HOLD_CYCLES = 4,
  parameter int GAP_CYCLES  = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic fire,
  output logic busy,
  output logic cal_start,
  output logic cal_stop
);
  typedef enum logic [1:0] {G_IDLE, G_HIGH, G_GAP} gstate_e;
  gstate_e   state;
  logic [7:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= G_IDLE;
      cnt       <= '0;
      cal_start <= 1'b0;
    end else begin
      case (state)
        G_IDLE: if (fire) begin
          state     <= G_HIGH;
          cal_start <= 1'b1;
          cnt       <= 8'(HOLD_CYCLES - 1);
        end
        G_HIGH: if (cnt == 0) begin
          state     <= G_GAP;
          cal_start <= 1'b0;
          cnt       <= 8'(GAP_CYCLES - 1);
        end else cnt <= cnt - 1'b1;
        G_GAP: if (cnt == 0) state <= G_IDLE;
               else cnt <= cnt - 1'b1;
        default: state <= G_IDLE;
      endcase
    end
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) cal_stop <= 1'b0;
    else        cal_stop <= cal_start;
  end

  assign busy = (state != G_IDLE);
endmodule
