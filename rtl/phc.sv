// phc - PTP hardware clock with pulse-per-second output.
//
// The clock holds seconds, nanoseconds and a 32-bit sub-nanosecond fraction.
// Every clock cycle the programmable increment (ns per cycle, fixed point,
// see tsn_time_pkg) is added; when the nanoseconds pass 999_999_999 they wrap
// and the seconds count up. Reading the time is a plain look at time_o,
// which always shows the value the clock reached at the last edge, so the
// visible resolution is one nanosecond but the time advances in steps of one
// clock period (8 ns at 125 MHz, as the Ethernet-side clock in the domain
// translator; 6.25 ns on average at 160 MHz, as a wireless end device clock).
//
// Host operations (cmd, taken on a cycle where cmd_valid is high):
//   PHC_SET_TIME  time_o becomes cmd.set_time at the next edge, fraction cleared
//   PHC_STEP      the edge advances the time as usual and then adds cmd.step_ns
//   PHC_SET_INC   the edge still uses the old increment; cmd.inc from then on
// These are the get/set time, offset correction and frequency-drift
// correction that the PTP servo software applies. pps_o is registered with
// the time: it is high while time_o.ns < PPS_WIDTH_NS, so its rising edge
// marks the first cycle of each second.
//
// Following the source: 1 ns numerical resolution, one clock per period,
// time/frequency adjustable by software, a PPS output. This design's choices:
// the fixed-point increment as the frequency control, the command encoding,
// the PPS pulse width and reset to time zero with the nominal increment.
// rst_n is both the asynchronous reset of the registers and the disable of
// the nanosecond-range assertion; lint reports that double use, which is
// intended.
`timescale 1ns/1ps
module phc
  import tsn_time_pkg::*;
#(
  parameter logic [INC_W-1:0] NOMINAL_INC  = INC_8NS,
  parameter int unsigned      PPS_WIDTH_NS = 100_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  phc_cmd_t         cmd,
  output ptp_time_t        time_o,
  output logic [INC_W-1:0] inc_o,
  output logic             pps_o
);

  ptp_time_t               t_q;
  logic [INC_FRAC_W-1:0]   frac_q;
  logic [INC_W-1:0]        inc_q;
  logic                    pps_q;

  ptp_time_t               t_adv, t_next;
  logic [INC_FRAC_W-1:0]   frac_next;
  logic [INC_W-1:0]        inc_next;

  always_comb begin
    logic [NS_W+INC_FRAC_W:0] acc;   // ns.frac plus increment, one guard bit
    logic [NS_W:0]            ns_sum;
    acc       = {1'b0, t_q.ns, frac_q} + {{(NS_W+1-INC_INT_W){1'b0}}, inc_q};
    ns_sum    = acc[NS_W+INC_FRAC_W -: NS_W+1];
    frac_next = acc[INC_FRAC_W-1:0];
    t_adv     = t_q;
    if (ns_sum >= {1'b0, NS_PER_SEC}) begin
      t_adv.ns  = NS_W'(ns_sum - {1'b0, NS_PER_SEC});
      t_adv.sec = t_q.sec + 1'b1;
    end else begin
      t_adv.ns  = ns_sum[NS_W-1:0];
    end

    t_next   = t_adv;
    inc_next = inc_q;
    if (cmd_valid) begin
      unique case (cmd.op)
        PHC_SET_TIME: begin
          t_next    = cmd.set_time;
          frac_next = '0;
        end
        PHC_STEP:    t_next   = time_add_ns(t_adv, cmd.step_ns);
        PHC_SET_INC: inc_next = cmd.inc;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q    <= '0;
      frac_q <= '0;
      inc_q  <= NOMINAL_INC;
      pps_q  <= 1'b1;
    end else begin
      t_q    <= t_next;
      frac_q <= frac_next;
      inc_q  <= inc_next;
      pps_q  <= (t_next.ns < NS_W'(PPS_WIDTH_NS));
    end
  end

  assign time_o = t_q;
  assign inc_o  = inc_q;
  assign pps_o  = pps_q;

  // The nanoseconds field never leaves its range.
  a_ns_range: assert property (@(posedge clk) disable iff (!rst_n) t_q.ns < NS_PER_SEC);

endmodule
