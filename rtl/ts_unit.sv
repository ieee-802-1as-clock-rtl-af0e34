// ts_unit - hardware timestamping unit.
//
// Latches the PHC time when a frame event is reported by the interface
// (start-of-frame delimiter on Ethernet, preamble detection or start of
// transmission on the radio). The unit runs on the interface clock and has
// a resolution of RES_CYCLES clock periods: a free-running strobe marks
// every RES_CYCLES-th cycle (the baseband sample instants) and the event is
// timestamped with the PHC value of the first strobe at or after it. With
// RES_CYCLES = 1 the resolution is the clock period (8 ns on the 125 MHz
// Ethernet side); with RES_CYCLES = 8 at 160 MHz it is the 50 ns sample
// period of a 20 MHz receiver, the bound that dominates wireless ingress
// timestamps.
//
// CAL_NS (signed, |CAL_NS| < 1 s) is added to every timestamp. Because an
// event is stamped at the strobe after it, a stamp is on average half a
// sample period late; CAL_NS = -RES_CYCLES x T_clk / 2 centres the
// quantisation error on zero (-25 ns for the 50 ns radio grid), which is
// the zero-mean uniform error in [-T_s/2, T_s/2) of the source's model.
//
// Interface: event_i is a one-cycle pulse per frame. At the strobe that
// serves it, ts_o takes the PHC time and ts_valid_o pulses for one cycle,
// and ts_o then holds until the next timestamp. Events that arrive while one
// is pending merge into it (a frame yields one timestamp); such a merge
// raises overrun_o for one cycle. Latency: 0..RES_CYCLES-1 cycles to the
// strobe, plus one register stage.
//
// Following the source: the unit latches the PHC, and its resolution is the
// interface sampling period. This design's choices: the strobe counter, the
// pending flag and merge rule, the overrun flag, the calibration constant
// and reset values. With RES_CYCLES = 1 every cycle is a strobe, so
// strobe_o is constantly high and overrun_o constantly low.
`timescale 1ns/1ps
module ts_unit
  import tsn_time_pkg::*;
#(
  parameter int unsigned RES_CYCLES = 1,
  parameter int          CAL_NS     = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  ptp_time_t phc,
  input  logic      event_i,
  output logic      strobe_o,
  output logic      ts_valid_o,
  output ptp_time_t ts_o,
  output logic      overrun_o
);

  localparam int unsigned CW = (RES_CYCLES > 1) ? $clog2(RES_CYCLES) : 1;

  logic [CW-1:0] cnt_q;
  logic          strobe;
  logic          pend_q;
  logic          take;
  ptp_time_t     ts_q;
  logic          vld_q;
  logic          ovr_q;

  assign strobe = (RES_CYCLES <= 1) || (cnt_q == CW'(RES_CYCLES - 1));
  assign take   = strobe && (pend_q || event_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q  <= '0;
      pend_q <= 1'b0;
      ts_q   <= '0;
      vld_q  <= 1'b0;
      ovr_q  <= 1'b0;
    end else begin
      cnt_q  <= strobe ? '0 : cnt_q + 1'b1;
      pend_q <= (pend_q || event_i) && !strobe;
      vld_q  <= take;
      ovr_q  <= pend_q && event_i;
      if (take) ts_q <= time_add_ns(phc, 32'(CAL_NS));
    end
  end

  assign strobe_o   = strobe;
  assign ts_valid_o = vld_q;
  assign ts_o       = ts_q;
  assign overrun_o  = ovr_q;

endmodule
