// tb_phc - self-checking testbench for the PTP hardware clock.
//
// A reference model keeps the clock as one 64-bit nanosecond count plus a
// 32-bit fraction and splits it into seconds / nanoseconds only when
// comparing, so the wrap at one second is computed differently from the
// design. It applies the same host commands (set time, offset steps of both
// signs across second boundaries, increments of 6.25 ns and 8 ns + 2^-10 ns)
// and the clock, its increment and the PPS level are compared every cycle.
// A few values are also checked against numbers worked out by hand, and
// every PPS rising edge must coincide with a change of the seconds.
`timescale 1ns/1ps
module tb_phc;
  import tsn_time_pkg::*;

  localparam int unsigned PPSW = 100_000_000;
  localparam longint unsigned NPS = 64'd1_000_000_000;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             cmd_valid = 1'b0;
  phc_cmd_t         cmd = '0;
  ptp_time_t        t;
  logic [INC_W-1:0] inc;
  logic             pps;

  int checks = 0;
  int failures = 0;
  int pps_rises = 0;
  int sec_changes = 0;

  phc #(.PPS_WIDTH_NS(PPSW)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .time_o(t), .inc_o(inc), .pps_o(pps)
  );

  always #4 clk = ~clk;

  // reference model
  longint unsigned  ref_tot = 0;
  logic [31:0]      ref_frac = '0;
  logic [INC_W-1:0] ref_inc = INC_8NS;

  logic cmd_edge = 1'b0;   // the last edge applied a host command
  always @(posedge clk) if (rst_n) begin
    logic [32:0] f;
    cmd_edge = cmd_valid;
    if (cmd_valid && cmd.op == PHC_SET_TIME) begin
      ref_tot  = longint'(cmd.set_time.sec) * NPS + longint'(cmd.set_time.ns);
      ref_frac = '0;
    end else begin
      f        = {1'b0, ref_frac} + {1'b0, ref_inc[31:0]};
      ref_frac = f[31:0];
      ref_tot  = ref_tot + longint'(ref_inc[39:32]) + longint'(f[32]);
      if (cmd_valid && cmd.op == PHC_STEP)    ref_tot = longint'(ref_tot) + longint'(cmd.step_ns);
      if (cmd_valid && cmd.op == PHC_SET_INC) ref_inc = cmd.inc;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: sec=%0d ns=%0d ref=%0d", what, $time, t.sec, t.ns, ref_tot);
    end
  endtask

  logic            pps_d = 1'b1;
  logic [47:0]     sec_d = '0;
  always @(negedge clk) if (rst_n) begin
    check(t.sec == 48'(ref_tot / NPS), "sec");
    check(t.ns  == 32'(ref_tot % NPS), "ns");
    check(inc == ref_inc, "inc");
    check(pps == (t.ns < PPSW), "pps level");
    if (pps && !pps_d && !cmd_edge) begin
      pps_rises++;
      check(t.sec != sec_d, "pps rise at second start");
    end
    if (t.sec != sec_d && !cmd_edge) check(pps && !pps_d, "second start raises pps");
    if (t.sec != sec_d) sec_changes++;
    pps_d = pps;
    sec_d = t.sec;
  end

  task automatic cycles(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic issue(input phc_op_e op, input logic [47:0] s, input logic [31:0] ns,
                       input logic signed [31:0] step, input logic [INC_W-1:0] i);
    @(negedge clk);
    cmd.op           = op;
    cmd.set_time.sec = s;
    cmd.set_time.ns  = ns;
    cmd.step_ns      = step;
    cmd.inc          = i;
    cmd_valid        = 1'b1;
    @(negedge clk);
    cmd_valid        = 1'b0;
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cycles(10);
    check(t.sec == 0 && t.ns == 80, "free run from reset: 10 x 8 ns");

    // set time just before a second boundary; the issue task's second
    // negedge is one edge after the load
    issue(PHC_SET_TIME, 48'd5, 32'd999_999_900, 0, '0);
    check(t.sec == 5 && t.ns == 999_999_900, "set time");
    cycles(13);
    check(t.sec == 6 && t.ns == 4, "second wrap: 5.999999900 + 13 x 8 ns");
    cycles(5);

    // offset steps, positive then negative across the second boundary
    issue(PHC_STEP, '0, '0, 32'sd500, '0);
    cycles(3);
    issue(PHC_STEP, '0, '0, -32'sd2000, '0);
    check(t.sec == 5, "negative step borrows from seconds");
    cycles(20);
    issue(PHC_STEP, '0, '0, 32'sd999_999_000, '0);
    cycles(20);

    // 160 MHz nominal increment: 6.25 ns per cycle, exact after 4 cycles
    issue(PHC_SET_INC, '0, '0, 0, INC_6P25NS);
    begin
      longint unsigned t0;
      t0 = longint'(t.sec) * NPS + longint'(t.ns);
      cycles(100);
      check(longint'(t.sec) * NPS + longint'(t.ns) - t0 == 625, "100 x 6.25 ns");
    end

    // frequency correction: 8 ns + 2^-10 ns per cycle
    issue(PHC_SET_INC, '0, '0, 0, INC_8NS + 40'h0000_40_0000);
    begin
      longint unsigned t0;
      t0 = longint'(t.sec) * NPS + longint'(t.ns);
      cycles(2048);
      check(longint'(t.sec) * NPS + longint'(t.ns) - t0 == 2048 * 8 + 2, "2048 x (8 + 1/1024) ns");
    end

    // random offset steps and set-times near second edges
    for (int k = 0; k < 40; k++) begin
      if (k % 4 == 0)
        issue(PHC_SET_TIME, 48'($urandom_range(0, 1000)), 32'(999_999_000 + $urandom_range(0, 999)), 0, '0);
      else
        issue(PHC_STEP, '0, '0, $signed(32'($urandom_range(0, 200_000_000))) - 32'sd100_000_000, '0);
      cycles($urandom_range(1, 200));
    end

    check(pps_rises >= 3, "PPS rising edges seen");
    $display("pps_rises=%0d sec_changes=%0d", pps_rises, sec_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
