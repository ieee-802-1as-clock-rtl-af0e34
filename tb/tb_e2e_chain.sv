// tb_e2e_chain - end-to-end synchronisation through two domain translators.
//
// The chain under test is grandmaster -> Ethernet -> translator A ->
// radio -> translator B -> Ethernet -> measuring slave, the laboratory
// chain used to find the floor of the hybrid network's error:
//   grandmaster  ideal clock (simulation time), exact timestamps.
//   translator A domain_translator at defaults. Its Ethernet port is a PTP
//                slave of the grandmaster (two-way, PI Kp 0.7 / Ki 0.3), its
//                radio port the master of B.
//   translator B domain_translator at defaults. Its radio port is a slave
//                of A (two-way, PI Kp 0.7 / Ki 0.3, radio stamps through B's
//                clock-domain crossing), its Ethernet port the master of the
//                measuring slave.
//   measuring    ideal slave: it exchanges Sync/Delay_Req with B's Ethernet
//   slave        port using exact timestamps of its own; the offset it
//                computes is the chain's error as an instrument sees it.
// The radio link is a cable (fixed 300 ns, no multipath); Ethernet links
// have a fixed 500 ns delay. Oscillators of A and B have -5 ppm and +10 ppm
// rate errors (applied as their starting frequency words), which the servos
// remove. Wired exchanges every 80 us and radio exchanges every 10 us keep the
// 1 s : 1/8 s ratio of real equipment at a compressed time scale. Every
// exchange starts at a random instant so the clock phases seen by the
// timestamp units vary.
//
// Checks over the second half of the run: the measured and the true error
// (B's clock against simulation time) stay within the analytical bound
// 4*4 (Ethernet stamps) + 2*16 (two clock crossings) + 25 (radio receive
// stamp) = 73 ns plus 30 ns for synchroniser jitter and servo residual; the
// measured mean is within 15 ns; the measurement agrees with the true error
// to within the Ethernet stamp errors of the last link.
`timescale 1ns/1ps
module tb_e2e_chain;
  import tsn_time_pkg::*;

  localparam longint NPS    = 64'd1_000_000_000;
  localparam longint BASE   = 64'd1_700_000_000 * NPS;   // ideal time at t = 0
  localparam int     ETH_NS = 500;
  localparam int     RF_NS  = 300;
  localparam int     N_WIRED = 60;
  localparam int     RF_PER_WIRED = 8;
  localparam realtime RF_PERIOD = 10_000.0;
  // -5 ppm and +10 ppm of 8 ns in 8.32 fixed point: 8 * ppm * 2^32
  localparam logic [INC_W-1:0] A_INC = INC_8NS - 40'd171799;
  localparam logic [INC_W-1:0] B_INC = INC_8NS + 40'd343597;

  // ---------------- clocks --------------------------------------------------
  logic ca_m = 1'b0, ca_w = 1'b0, cb_m = 1'b0, cb_w = 1'b0;
  logic rst_n = 1'b0;
  always #4 ca_m = ~ca_m;
  initial begin #0.7; forever #3.125 ca_w = ~ca_w; end
  initial begin #1.9; forever #4     cb_m = ~cb_m; end
  initial begin #2.3; forever #3.125 cb_w = ~cb_w; end

  // ---------------- translator A ------------------------------------------
  logic             a_cmd_v = 1'b0;
  phc_cmd_t         a_cmd = '0;
  ptp_time_t        a_time, a_wl_time, a_erx_ts, a_etx_ts, a_wrx_ts, a_wtx_ts;
  logic [INC_W-1:0] a_inc;
  logic             a_pps, a_wl_v, a_stb, a_erx_v, a_etx_v, a_eovr, a_wrx_v, a_wtx_v, a_wovr;
  logic             a_erx_ev = 1'b0, a_etx_ev = 1'b0, a_wrx_ev = 1'b0, a_wtx_ev = 1'b0;

  domain_translator u_a (
    .clk_mtsn(ca_m), .rst_mtsn_n(rst_n), .phc_cmd_valid(a_cmd_v), .phc_cmd(a_cmd),
    .phc_time(a_time), .phc_inc(a_inc), .pps_out(a_pps),
    .eth_rx_event(a_erx_ev), .eth_tx_event(a_etx_ev),
    .eth_rx_ts_valid(a_erx_v), .eth_rx_ts(a_erx_ts),
    .eth_tx_ts_valid(a_etx_v), .eth_tx_ts(a_etx_ts), .eth_ts_overrun(a_eovr),
    .clk_wireless(ca_w), .rst_wireless_n(rst_n),
    .phc_wireless(a_wl_time), .phc_wireless_valid(a_wl_v), .wl_sample_strobe(a_stb),
    .wl_rx_event(a_wrx_ev), .wl_tx_event(a_wtx_ev),
    .wl_rx_ts_valid(a_wrx_v), .wl_rx_ts(a_wrx_ts),
    .wl_tx_ts_valid(a_wtx_v), .wl_tx_ts(a_wtx_ts), .wl_ts_overrun(a_wovr)
  );

  // ---------------- translator B ------------------------------------------
  logic             b_cmd_v = 1'b0;
  phc_cmd_t         b_cmd = '0;
  ptp_time_t        b_time, b_wl_time, b_erx_ts, b_etx_ts, b_wrx_ts, b_wtx_ts;
  logic [INC_W-1:0] b_inc;
  logic             b_pps, b_wl_v, b_stb, b_erx_v, b_etx_v, b_eovr, b_wrx_v, b_wtx_v, b_wovr;
  logic             b_erx_ev = 1'b0, b_etx_ev = 1'b0, b_wrx_ev = 1'b0, b_wtx_ev = 1'b0;

  domain_translator u_b (
    .clk_mtsn(cb_m), .rst_mtsn_n(rst_n), .phc_cmd_valid(b_cmd_v), .phc_cmd(b_cmd),
    .phc_time(b_time), .phc_inc(b_inc), .pps_out(b_pps),
    .eth_rx_event(b_erx_ev), .eth_tx_event(b_etx_ev),
    .eth_rx_ts_valid(b_erx_v), .eth_rx_ts(b_erx_ts),
    .eth_tx_ts_valid(b_etx_v), .eth_tx_ts(b_etx_ts), .eth_ts_overrun(b_eovr),
    .clk_wireless(cb_w), .rst_wireless_n(rst_n),
    .phc_wireless(b_wl_time), .phc_wireless_valid(b_wl_v), .wl_sample_strobe(b_stb),
    .wl_rx_event(b_wrx_ev), .wl_tx_event(b_wtx_ev),
    .wl_rx_ts_valid(b_wrx_v), .wl_rx_ts(b_wrx_ts),
    .wl_tx_ts_valid(b_wtx_v), .wl_tx_ts(b_wtx_ts), .wl_ts_overrun(b_wovr)
  );

  // ---------------- bookkeeping -------------------------------------------
  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // PHC time relative to BASE, in ns
  function automatic real rel(ptp_time_t t);
    return real'(longint'(t.sec) * NPS + longint'(t.ns) - BASE);
  endfunction

  realtime last_b_edge = 0;
  always @(posedge cb_m) last_b_edge = $realtime;

  // true error of B's clock, extrapolated from its last edge
  function automatic real b_error();
    return rel(b_time) + ($realtime - last_b_edge) - $realtime;
  endfunction

  // ---------------- frame helpers: tx stamps ------------------------------
  // each sets the event before an interface clock edge and returns the
  // timestamp and the instant the frame leaves (that edge)
  task automatic a_eth_send(output real ts, output realtime dep);
    @(negedge ca_m); a_etx_ev = 1'b1; @(posedge ca_m); dep = $realtime;
    #0.1 a_etx_ev = 1'b0; wait (a_etx_v); ts = rel(a_etx_ts);
  endtask
  task automatic b_eth_send(output real ts, output realtime dep);
    @(negedge cb_m); b_etx_ev = 1'b1; @(posedge cb_m); dep = $realtime;
    #0.1 b_etx_ev = 1'b0; wait (b_etx_v); ts = rel(b_etx_ts);
  endtask
  task automatic a_rf_send(output real ts, output realtime dep);
    @(negedge ca_w); a_wtx_ev = 1'b1; @(posedge ca_w); dep = $realtime;
    #0.1 a_wtx_ev = 1'b0; wait (a_wtx_v); ts = rel(a_wtx_ts);
  endtask
  task automatic b_rf_send(output real ts, output realtime dep);
    @(negedge cb_w); b_wtx_ev = 1'b1; @(posedge cb_w); dep = $realtime;
    #0.1 b_wtx_ev = 1'b0; wait (b_wtx_v); ts = rel(b_wtx_ts);
  endtask

  // ---------------- frame helpers: rx stamps at the arrival instant -------
  task automatic a_eth_recv(input realtime arr, output real ts);
    #(arr - $realtime); a_erx_ev = 1'b1; @(posedge ca_m);
    #0.1 a_erx_ev = 1'b0; wait (a_erx_v); ts = rel(a_erx_ts);
  endtask
  task automatic b_eth_recv(input realtime arr, output real ts);
    #(arr - $realtime); b_erx_ev = 1'b1; @(posedge cb_m);
    #0.1 b_erx_ev = 1'b0; wait (b_erx_v); ts = rel(b_erx_ts);
  endtask
  task automatic a_rf_recv(input realtime arr, output real ts);
    #(arr - $realtime); a_wrx_ev = 1'b1; @(posedge ca_w);
    #0.1 a_wrx_ev = 1'b0; wait (a_wrx_v); ts = rel(a_wrx_ts);
  endtask
  task automatic b_rf_recv(input realtime arr, output real ts);
    #(arr - $realtime); b_wrx_ev = 1'b1; @(posedge cb_w);
    #0.1 b_wrx_ev = 1'b0; wait (b_wrx_v); ts = rel(b_wrx_ts);
  endtask

  // ---------------- clock commands ----------------------------------------
  task automatic a_command(input phc_op_e op, input int step, input logic [INC_W-1:0] inc);
    @(negedge ca_m);
    a_cmd.op = op; a_cmd.step_ns = step; a_cmd.inc = inc; a_cmd_v = 1'b1;
    @(negedge ca_m);
    a_cmd_v = 1'b0;
  endtask
  task automatic b_command(input phc_op_e op, input int step, input logic [INC_W-1:0] inc);
    @(negedge cb_m);
    b_cmd.op = op; b_cmd.step_ns = step; b_cmd.inc = inc; b_cmd_v = 1'b1;
    @(negedge cb_m);
    b_cmd_v = 1'b0;
  endtask

  // ---------------- PI servos (one per slave port) ------------------------
  real a_integ = 0.0, b_integ = 0.0;
  real a_freq = 0.0, b_freq = 0.0;   // fractional correction applied so far
  bit  a_locked = 1'b0, b_locked = 1'b0;

  task automatic servo_a(input real off);
    if (!a_locked) begin
      a_command(PHC_STEP, -int'(off), '0);
      a_locked = 1'b1;
    end else begin
      a_integ += 0.3 * off;
      a_freq = -(0.7 * off + a_integ) / (RF_PERIOD * RF_PER_WIRED);
      a_command(PHC_SET_INC, 0, INC_W'(longint'(real'(A_INC) * (1.0 + a_freq))));
    end
  endtask
  task automatic servo_b(input real off);
    if (!b_locked) begin
      b_command(PHC_STEP, -int'(off), '0);
      b_locked = 1'b1;
    end else begin
      b_integ += 0.3 * off;
      b_freq = -(0.7 * off + b_integ) / RF_PERIOD;
      b_command(PHC_SET_INC, 0, INC_W'(longint'(real'(B_INC) * (1.0 + b_freq))));
    end
  endtask

  // ---------------- exchanges ---------------------------------------------
  // grandmaster -> A (Ethernet, A is slave); returns A's offset estimate
  task automatic wired_gm_a(output real off);
    real t1, t2, t3, t4;
    realtime dep;
    #($urandom_range(0, 15));
    dep = $realtime; t1 = dep;                    // exact grandmaster stamp
    a_eth_recv(dep + ETH_NS, t2);
    #(1000 + $urandom_range(0, 15));
    a_eth_send(t3, dep);
    t4 = dep + ETH_NS;                            // exact grandmaster stamp
    off = ((t2 - t1) - (t4 - t3)) / 2.0;
  endtask

  // A -> B (radio, B is slave)
  task automatic radio_a_b(output real off);
    real t1, t2, t3, t4;
    realtime dep;
    #($urandom_range(0, 49));
    a_rf_send(t1, dep);
    b_rf_recv(dep + RF_NS, t2);
    #(2000 + $urandom_range(0, 49));
    b_rf_send(t3, dep);
    a_rf_recv(dep + RF_NS, t4);
    off = ((t2 - t1) - (t4 - t3)) / 2.0;
  endtask

  // B -> measuring slave (Ethernet); returns B minus the slave's ideal clock
  task automatic wired_b_meas(output real err);
    real t1, t2, t3, t4;
    realtime dep;
    #($urandom_range(0, 15));
    b_eth_send(t1, dep);
    t2 = dep + ETH_NS;                            // exact slave stamp
    #(1000 + $urandom_range(0, 15));
    dep = $realtime; t3 = dep;                    // exact slave stamp
    b_eth_recv(dep + ETH_NS, t4);
    err = -(((t2 - t1) - (t4 - t3)) / 2.0);
  endtask

  // ---------------- watchdog ----------------------------------------------
  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- run ---------------------------------------------------
  initial begin
    real     off, em, et, sum, sum2, sumt, emax, etmax, dmax, mu, sd;
    realtime start;
    int      n;
    sum = 0.0; sum2 = 0.0; sumt = 0.0; emax = 0.0; etmax = 0.0; dmax = 0.0; n = 0;
    #30;
    rst_n = 1'b1;
    repeat (4) @(negedge ca_m);
    // both translators power up with a rough time and their own oscillator
    a_cmd.set_time.sec = 48'(BASE / NPS); a_cmd.set_time.ns = 32'd4_000;
    a_command(PHC_SET_TIME, 0, '0);
    a_command(PHC_SET_INC, 0, A_INC);
    b_cmd.set_time.sec = 48'(BASE / NPS); b_cmd.set_time.ns = 32'd9_000;
    b_command(PHC_SET_TIME, 0, '0);
    b_command(PHC_SET_INC, 0, B_INC);
    check(a_inc == A_INC && b_inc == B_INC, "oscillator rates loaded");

    for (int w = 0; w < N_WIRED; w++) begin
      wired_gm_a(off);
      servo_a(off);
      for (int r = 0; r < RF_PER_WIRED; r++) begin
        start = $realtime;
        radio_a_b(off);
        servo_b(off);
        #(start + RF_PERIOD / 2 - $realtime);
        if (w >= N_WIRED / 2) begin
          wired_b_meas(em);
          et = b_error();
          sum += em; sum2 += em * em; sumt += et; n++;
          if (em > emax) emax = em;
          if (-em > emax) emax = -em;
          if (et > etmax) etmax = et;
          if (-et > etmax) etmax = -et;
          if (em - et > dmax) dmax = em - et;
          if (et - em > dmax) dmax = et - em;
        end
        #(start + RF_PERIOD - $realtime);
      end
    end

    mu = sum / n;
    sd = (sum2 / n - mu * mu > 0.0) ? $sqrt(sum2 / n - mu * mu) : 0.0;
    $display("end-to-end, %0d samples: measured mu=%6.1f ns sigma=%6.1f ns max|err|=%6.1f ns; true mean %6.1f max %6.1f; bound 73 ns",
             n, mu, sd, emax, sumt / n, etmax);
    check(emax <= 73.0 + 30.0, "measured error within the end-to-end bound");
    check(etmax <= 73.0 + 30.0, "true error within the end-to-end bound");
    check(mu > -15.0 && mu < 15.0, "measured mean near zero");
    check(dmax <= 16.0, "measurement agrees with the true error");
    check(sd > 0.5, "error shows the timestamp quantisation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
