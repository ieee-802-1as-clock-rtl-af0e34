// tb_ts_unit - self-checking testbench for the timestamping unit.
//
// Two units share one random event stream: one with RES_CYCLES = 8 (50 ns at
// 160 MHz, a radio receiver) and a -25 ns calibration, and one with
// RES_CYCLES = 1 (the clock period) and none. The PHC input is 10 s plus
// 8 ns times the cycle index, so a timestamp names the cycle it was taken
// on; the calibration borrows from the seconds on the first stamps. The reference numbers cycles from the first edge
// after reset: the sample strobe falls on cycles with index mod RES = RES-1,
// an event is served by the first strobe at or after it, and an event that
// arrives while one is pending is merged and flagged. Every cycle the valid,
// timestamp and overrun outputs are compared, and each timestamp must lie on
// the sample grid and at most RES-1 cycles after its event.
`timescale 1ns/1ps
module tb_ts_unit;
  import tsn_time_pkg::*;

  localparam int unsigned RES = 8;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  ptp_time_t phc = '0;
  logic      ev = 1'b0;

  logic      stb8, vld8, ovr8, stb1, vld1, ovr1;
  ptp_time_t ts8, ts1;

  int checks = 0;
  int failures = 0;
  int n_ts8 = 0, n_ovr8 = 0, n_ts1 = 0;

  ts_unit #(.RES_CYCLES(RES), .CAL_NS(-25)) dut8 (
    .clk, .rst_n, .phc, .event_i(ev), .strobe_o(stb8), .ts_valid_o(vld8), .ts_o(ts8), .overrun_o(ovr8)
  );
  ts_unit #(.RES_CYCLES(1)) dut1 (
    .clk, .rst_n, .phc, .event_i(ev), .strobe_o(stb1), .ts_valid_o(vld1), .ts_o(ts1), .overrun_o(ovr1)
  );

  always #3.125 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  m;             // index of the edge that just happened
    bit  pend8;
    int  pend_since;
    bit  exp_vld8, exp_ovr8, exp_vld1;
    longint exp_ts8, exp_ts1;
    bit  ev_now;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    m = -1;
    pend8 = 1'b0;
    pend_since = 0;
    exp_ts8 = 0;
    exp_ts1 = 0;
    phc.sec = 48'd10;
    phc.ns = 32'd0;                  // value seen at edge 0
    for (int k = 0; k < 4000; k++) begin
      // choose the event for edge m+1 (bursts now and then to force merges)
      ev_now = ($urandom_range(0, 11) == 0) || (k % 500 > 490 && k % 2 == 0);
      ev = ev_now;
      @(negedge clk);
      m++;
      // reference for the edge m that just happened, with PHC = 8 m
      exp_ovr8 = pend8 && ev_now;
      if (ev_now && !pend8) pend_since = m;
      if ((m % RES) == RES - 1 && (pend8 || ev_now)) begin
        exp_vld8 = 1'b1;
        exp_ts8  = 8 * m;
        check(m - pend_since <= RES - 1 && m >= pend_since, "latency within one sample period");
        pend8 = 1'b0;
      end else begin
        exp_vld8 = 1'b0;
        pend8 = pend8 || ev_now;
      end
      exp_vld1 = ev_now;
      if (ev_now) exp_ts1 = 8 * m;

      check(vld8 == exp_vld8, "RES=8 valid");
      if (n_ts8 > 0 || vld8)
        check(longint'(ts8.sec) * 1_000_000_000 + longint'(ts8.ns) == 64'd10_000_000_000 + exp_ts8 - 25,
              "RES=8 timestamp, calibrated");
      check(ovr8 == exp_ovr8, "RES=8 overrun");
      check(stb8 == ((m + 1) % RES == RES - 1), "RES=8 strobe position");
      check(vld1 == exp_vld1, "RES=1 valid");
      if (n_ts1 > 0 || vld1)
        check(ts1.sec == 48'd10 && longint'(ts1.ns) == exp_ts1, "RES=1 timestamp");
      check(!ovr1, "RES=1 never merges single-cycle events");
      if (vld8) begin
        n_ts8++;
        check(((longint'(ts8.sec) * 1_000_000_000 + longint'(ts8.ns) + 25) / 8) % RES == RES - 1,
              "timestamp on the 50 ns grid");
      end
      if (ovr8) n_ovr8++;
      if (vld1) n_ts1++;
      phc.ns = 32'(8 * (m + 1));     // value seen at edge m+1
    end
    check(n_ts8 > 50 && n_ovr8 > 0 && n_ts1 > n_ts8, "timestamps and merges happened");
    $display("ts8=%0d merges=%0d ts1=%0d", n_ts8, n_ovr8, n_ts1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
