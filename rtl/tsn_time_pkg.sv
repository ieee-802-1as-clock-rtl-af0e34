// tsn_time_pkg - time format and host command types shared by the PTP
// hardware clock (phc), the clock domain crossing (phc_cdc), the timestamping
// units (ts_unit) and the domain translator top.
//
// A PTP time is kept as 48-bit seconds plus a 32-bit nanoseconds field that
// always holds 0 .. 999_999_999 (the IEEE 1588 timestamp layout; the clock
// itself has 1 ns numerical resolution). The clock rate word (increment) is
// an unsigned fixed-point number of nanoseconds per clock cycle with
// INC_INT_W integer and INC_FRAC_W fractional bits, so 8 ns (125 MHz) and
// 6.25 ns (160 MHz) are both exact and frequency corrections of
// 2^-32 ns per cycle are possible. The layout and widths are this design's
// choice; nothing in this package holds state.
`timescale 1ns/1ps
package tsn_time_pkg;

  localparam int unsigned SEC_W      = 48;
  localparam int unsigned NS_W       = 32;
  localparam int unsigned INC_INT_W  = 8;
  localparam int unsigned INC_FRAC_W = 32;
  localparam int unsigned INC_W      = INC_INT_W + INC_FRAC_W;

  localparam logic [NS_W-1:0] NS_PER_SEC = 32'd1_000_000_000;

  // Nominal increments: one clock period in ns, fixed point.
  localparam logic [INC_W-1:0] INC_8NS    = 40'h08_0000_0000; // 125 MHz
  localparam logic [INC_W-1:0] INC_6P25NS = 40'h06_4000_0000; // 160 MHz

  typedef struct packed {
    logic [SEC_W-1:0] sec;
    logic [NS_W-1:0]  ns;
  } ptp_time_t;

  // Operations the host software issues to the clock (get time is a plain
  // read of the time output).
  typedef enum logic [1:0] {
    PHC_NOP      = 2'd0,
    PHC_SET_TIME = 2'd1,  // load sec/ns, clear the sub-ns fraction
    PHC_STEP     = 2'd2,  // add a signed offset in ns (|offset| < 1 s)
    PHC_SET_INC  = 2'd3   // load a new increment (frequency correction)
  } phc_op_e;

  typedef struct packed {
    phc_op_e                 op;
    ptp_time_t               set_time;
    logic signed [31:0]      step_ns;
    logic [INC_W-1:0]        inc;
  } phc_cmd_t;

  // Add a signed number of nanoseconds (magnitude below one second) to a time
  // with a valid ns field, borrowing from or carrying into the seconds.
  function automatic ptp_time_t time_add_ns(ptp_time_t t, logic signed [31:0] off);
    ptp_time_t r;
    logic signed [33:0] s;
    logic signed [33:0] nps;
    nps = $signed({2'b00, NS_PER_SEC});
    s   = $signed({2'b00, t.ns}) + $signed({{2{off[31]}}, off});
    r   = t;
    if (s < 0) begin
      r.ns  = NS_W'(s + nps);
      r.sec = t.sec - 1'b1;
    end else if (s >= nps) begin
      r.ns  = NS_W'(s - nps);
      r.sec = t.sec + 1'b1;
    end else begin
      r.ns  = NS_W'(s);
    end
    return r;
  endfunction

endpackage
