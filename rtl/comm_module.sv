// comm_module: host configuration registers and result output of the chip.
//
// Register bus (synchronous, one write per clock, read data combinational):
//   0x0 CTRL    write: bit 0 = 1 starts a calibration (one-cycle cal_req),
//               bits 7:4 = channel enables (reset 4'hF); read: enables
//   0x1 STATUS  bit 0 cal_mode, bits 7:4 cal_err per channel,
//               bits 11:8 cal_changed per channel, bits 15:12 lost results (sat.)
//   0x2 CALCNT  completed calibrations
//   0x4..0x7    recorded effective length of channel 0..3
//   0x8         result FIFO fill level
// Results: every channel has a one-entry holding register; a round-robin
// arbiter moves one held result per clock into a FIFO_DEPTH-entry FIFO that
// drives the out_valid/out_ready stream of {channel, interval}. A result
// arriving while its holding register is still full is dropped and counted.
// The paper only names this block ("configure, output"); the bus, the register
// map and the FIFO are choices of this design.
`timescale 1ps/1ps
module comm_module #(
  parameter int N_CH       = tdc_pkg::N_CH,
  parameter int FIFO_DEPTH = 16
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // host register bus
  input  logic                                  wr_en,
  input  logic [3:0]                            addr,
  input  logic [15:0]                           wdata,
  output logic [15:0]                           rdata,
  // to/from the core
  output logic                                  cal_req,
  output logic [N_CH-1:0]                       ch_en,
  input  logic                                  cal_mode,
  input  logic [7:0]                            cal_count,
  input  logic [N_CH-1:0]                       cal_err,
  input  logic [N_CH-1:0]                       cal_changed,
  input  logic [N_CH-1:0][tdc_pkg::TAP_W-1:0]   eff_len,
  input  logic [N_CH-1:0]                       res_valid,
  input  logic [N_CH-1:0][tdc_pkg::RES_W-1:0]   res_interval,
  // result stream
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output tdc_pkg::result_t                      out_data
);
  import tdc_pkg::*;
  localparam int AW = $clog2(FIFO_DEPTH);

  logic [N_CH-1:0]                 held;
  logic [N_CH-1:0][RES_W-1:0]      hold_data;
  logic [3:0]                      lost;
  logic [$clog2(N_CH)-1:0]         rr;          // next channel to look at first
  logic                            grant_v;
  logic [$clog2(N_CH)-1:0]         grant;

  result_t         fifo [FIFO_DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [AW:0]     level;
  logic            push, pop;
  logic [$clog2(N_CH):0] drops;                 // results lost this cycle

  // round-robin pick among held results (N_CH is a power of two, so the
  // candidate index wraps by itself)
  logic [$clog2(N_CH)-1:0] cand;
  logic [N_CH-1:0]         freed;       // holding register emptied this cycle
  always_comb begin
    grant_v = 1'b0;
    grant   = '0;
    cand    = '0;
    for (int k = 0; k < N_CH; k++) begin
      cand = rr + ($clog2(N_CH))'(k);
      if (!grant_v && held[cand]) begin
        grant_v = 1'b1;
        grant   = cand;
      end
    end
  end

  always_comb begin
    drops = '0;
    for (int c = 0; c < N_CH; c++) begin
      freed[c] = push && (grant == ($clog2(N_CH))'(c));
      if (res_valid[c] && held[c] && !freed[c]) drops = drops + 1'b1;
    end
  end

  assign push = grant_v && (level != (AW+1)'(FIFO_DEPTH));
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      hold_data <= '0;
      lost      <= '0;
      rr        <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (res_valid[c]) begin
          if (!held[c] || freed[c]) begin
            held[c]      <= 1'b1;
            hold_data[c] <= res_interval[c];
          end
        end else if (freed[c]) begin
          held[c] <= 1'b0;
        end
      end
      if (5'(lost) + 5'(drops) > 5'd15) lost <= 4'hF;
      else                              lost <= lost + 4'(drops);
      if (push) rr <= grant + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wptr] <= '{ch: CH_W'(grant), interval: hold_data[grant]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign out_valid = (level != '0);
  assign out_data  = fifo[rptr];

  // registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cal_req <= 1'b0;
      ch_en   <= '1;
    end else begin
      cal_req <= wr_en && (addr == 4'h0) && wdata[0];
      if (wr_en && addr == 4'h0) ch_en <= wdata[4 +: N_CH];
    end
  end

  always_comb begin
    rdata = '0;
    case (addr)
      4'h0: rdata[4 +: N_CH] = ch_en;
      4'h1: begin
        rdata[0]        = cal_mode;
        rdata[4 +: N_CH] = cal_err;
        rdata[8 +: N_CH] = cal_changed;
        rdata[15:12]    = lost;
      end
      4'h2: rdata[7:0] = cal_count;
      4'h8: rdata[AW:0] = level;
      default: if (addr >= 4'h4 && addr < 4'(4 + N_CH)) rdata[TAP_W-1:0] = eff_len[addr - 4'h4];
    endcase
  end

  assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(FIFO_DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
