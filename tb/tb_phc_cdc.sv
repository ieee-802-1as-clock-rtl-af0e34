// tb_phc_cdc - self-checking testbench for the PHC clock domain crossing.
//
// The source clock runs at 125 MHz (8 ns) and the destination at 160 MHz
// (6.25 ns), asynchronous in phase. The testbench drives the source time
// itself: it is the simulation time in ns plus a base just below a second
// boundary, sampled at each source edge, so the second carry of the
// calibration adder is exercised too. Checked at every destination cycle:
//   - data_valid is a single-cycle pulse and the copy changes only with it;
//   - successive copies differ by exactly DIV x 8 ns = 32 ns (no update is
//     lost or repeated) and the update count matches the elapsed time;
//   - each copy equals a sampled source time plus the calibration
//     T_Src/2 + 24 ns = 40 ns, and it is not older than the synchroniser
//     allows;
//   - the translation error against the true time stays inside
//     +-(T_Src/2 + T_Dst + 1) ns (quantisation plus the synchroniser's jitter
//     of one destination period) and its mean is within 5 ns of zero.
`timescale 1ns/1ps
module tb_phc_cdc;
  import tsn_time_pkg::*;

  localparam longint unsigned NPS  = 64'd1_000_000_000;
  localparam longint          BASE = 64'd7_999_990_000;   // 7.999990 s

  logic      clk_src = 1'b0, clk_dst = 1'b0;
  logic      rst_src_n = 1'b0, rst_dst_n = 1'b0;
  ptp_time_t phc_src = '0;
  ptp_time_t phc_dst;
  logic      data_valid;

  int checks = 0;
  int failures = 0;
  int updates = 0;
  real err_min = 1.0e9, err_max = -1.0e9, err_sum = 0.0;
  int  err_n = 0;

  phc_cdc dut (
    .clk_src, .rst_src_n, .phc_src, .clk_dst, .rst_dst_n, .phc_dst, .data_valid
  );

  always #4     clk_src = ~clk_src;
  initial begin
    #1.3;
    forever #3.125 clk_dst = ~clk_dst;
  end

  function automatic longint to_ns(ptp_time_t t);
    return longint'(t.sec) * longint'(NPS) + longint'(t.ns);
  endfunction

  function automatic ptp_time_t from_ns(longint v);
    ptp_time_t t;
    t.sec = 48'(v / longint'(NPS));
    t.ns  = 32'(v % longint'(NPS));
    return t;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // source time = BASE + (simulation time since t0), taken at source edges
  realtime t0;
  bit      running = 1'b0;
  always @(posedge clk_src) if (running)
    phc_src <= from_ns(BASE + longint'($realtime - t0));

  longint    last_v = 0;
  bit        have_last = 1'b0;
  logic      dv_d = 1'b0;
  ptp_time_t dst_d = '0;
  realtime   t_first = 0;
  always @(negedge clk_dst) if (running && rst_dst_n) begin
    longint  v;
    real     now_ns, err;
    v      = to_ns(phc_dst);
    now_ns = real'(BASE) + ($realtime - 3.125 - t0);   // at the last dst edge
    check(!(data_valid && dv_d), "data_valid is one cycle wide");
    if (!data_valid) check(phc_dst == dst_d, "copy only changes with data_valid");
    if (data_valid) begin
      updates++;
      if (!have_last) t_first = $realtime;
      if (have_last) check(v - last_v == 32, "successive copies 32 ns apart");
      // the copy minus calibration is a source sample: a multiple of 8 ns from BASE
      check(((v - 40 - BASE) % 8) == 0, "copy is a sampled source time + 40 ns");
      check(now_ns - real'(v - 40) >= 0.0 && now_ns - real'(v - 40) <= 32.0,
            "copy age within synchroniser bound");
      last_v    = v;
      have_last = 1'b1;
    end
    if (have_last) begin
      err = real'(v) - now_ns;
      check(err >= -(16.0 + 6.25 + 1.0) && err <= 16.0 + 6.25 + 1.0, "translation error bound");
      if (err < err_min) err_min = err;
      if (err > err_max) err_max = err;
      err_sum += err;
      err_n++;
    end
    dv_d  = data_valid;
    dst_d = phc_dst;
  end

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    rst_src_n = 1'b1;
    rst_dst_n = 1'b1;
    @(negedge clk_src);
    t0 = $realtime - 4.0;      // the source edge just passed
    running = 1'b1;
    #20_000;
    // 20 us / 32 ns = 625 updates, minus start-up
    check(updates >= 620 && updates <= 626, "update rate 31.25 MHz");
    check(err_max - err_min >= 30.0, "error spans the 32 ns quantisation");
    check(err_sum / err_n > -5.0 && err_sum / err_n < 5.0, "zero-mean translation error");
    $display("updates=%0d err min=%0.2f max=%0.2f mean=%0.2f ns", updates, err_min, err_max, err_sum / err_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
