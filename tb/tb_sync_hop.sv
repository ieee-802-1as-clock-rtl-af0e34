// tb_sync_hop - wireless synchronisation hop through the domain translator.
//
// The translator (access point side, default parameters) is the master: its
// clock is the reference. A wireless end device (STA) is built from the same
// blocks: a PTP hardware clock at 160 MHz (nominal 6.25 ns per cycle) with a
// deliberate +10 ppm rate error, a receive timestamp unit on the 20 MHz
// sample grid (centred by -25 ns, as in the translator) and a transmit
// timestamp unit. The testbench plays the radio
// channel and the servo software:
//   channel   each frame arrives 1135 ns (the channel emulator's port-to-port
//             delay) plus a multipath excess after it left; with probability
//             1/4 the excess is uniform in [0, max_dm] (the receiver locks to
//             a late replica), otherwise zero. max_dm per channel: AWGN 0,
//             WLAN A 390, WLAN C 1050, IWLAN A 140, IWLAN B 600 ns.
//   802.11    two-way exchange: Sync (t1 = AP tx stamp, one-step), Delay_Req
//             (t3 = STA tx stamp, t4 = AP rx stamp); delay and offset by
//             Eqs. (1)-(2); PI servo Kp = 0.7, Ki = 0.3.
//   w-SHARP   one-way beacons: offset = t2 - t1 - 1135 (pre-calibrated
//             channel delay); PI servo Kp = 0.1, Ki = 0.01.
// The first exchange steps the STA clock; later ones set its frequency word.
// Each exchange starts at a random point of the 50 ns sample period, since
// the real oscillators are independent and the sample phase wanders.
// The error STA - AP is sampled once per exchange over the second half of
// each run. Checked per scenario: the servo converges and the largest error
// stays inside the analytical bound of the hop (translation 16 ns, radio
// resolution 25 ns, multipath max_dm/2 for two-way or max_dm for one-way)
// plus an allowance for synchroniser jitter and servo residual (40 ns); with
// no multipath the mean error is within 10 ns. Across scenarios: two-way
// means stay within 25 ns, one-way means grow more negative with the delay
// spread (the late replica is not compensated).
// Over the air: both schemes are also run with no multipath and 2 or 33 ns
// of propagation (0.5 m, 10 m) that the one-way calibration does not know;
// checked: the one-way mean moves by about the 31 ns difference, the two-way
// mean by less than 10 ns.
// Time is compressed: exchanges every 40 us (802.11, 1/8 s on real
// equipment) and 100 us (w-SHARP, 500 us on real equipment).
`timescale 1ns/1ps
module tb_sync_hop;
  import tsn_time_pkg::*;

  localparam longint NPS     = 64'd1_000_000_000;
  localparam int     CH_NS   = 1135;
  localparam int     NSCEN   = 5;
  localparam int     DM_TAB [NSCEN] = '{0, 390, 1050, 140, 600};
  localparam string  NAME_TAB [NSCEN] = '{"AWGN", "WLAN A", "WLAN C", "IWLAN A", "IWLAN B"};
  // STA oscillator +10 ppm: 6.25 ns * 1e-5 * 2^32 = 268435.456
  localparam logic [INC_W-1:0] STA_INC = INC_6P25NS + 40'd268435;

  // ---------------- clocks and the access point ---------------------------
  logic clk_mtsn = 1'b0, clk_wl = 1'b0, clk_sta = 1'b0;
  logic rst_n = 1'b0;
  always #4 clk_mtsn = ~clk_mtsn;
  initial begin #0.7; forever #3.125 clk_wl = ~clk_wl; end
  initial begin #2.9; forever #3.125 clk_sta = ~clk_sta; end

  logic             ap_cmd_valid = 1'b0;
  phc_cmd_t         ap_cmd = '0;
  ptp_time_t        ap_time, ap_wl_time, ap_eth_rx_ts, ap_eth_tx_ts, ap_wl_rx_ts, ap_wl_tx_ts;
  logic [INC_W-1:0] ap_inc;
  logic             ap_pps, ap_wl_valid, ap_strobe, ap_eth_rx_v, ap_eth_tx_v, ap_eth_ovr;
  logic             ap_wl_rx_ev = 1'b0, ap_wl_tx_ev = 1'b0;
  logic             ap_wl_rx_v, ap_wl_tx_v, ap_wl_ovr;

  domain_translator u_ap (
    .clk_mtsn(clk_mtsn), .rst_mtsn_n(rst_n),
    .phc_cmd_valid(ap_cmd_valid), .phc_cmd(ap_cmd),
    .phc_time(ap_time), .phc_inc(ap_inc), .pps_out(ap_pps),
    .eth_rx_event(1'b0), .eth_tx_event(1'b0),
    .eth_rx_ts_valid(ap_eth_rx_v), .eth_rx_ts(ap_eth_rx_ts),
    .eth_tx_ts_valid(ap_eth_tx_v), .eth_tx_ts(ap_eth_tx_ts), .eth_ts_overrun(ap_eth_ovr),
    .clk_wireless(clk_wl), .rst_wireless_n(rst_n),
    .phc_wireless(ap_wl_time), .phc_wireless_valid(ap_wl_valid), .wl_sample_strobe(ap_strobe),
    .wl_rx_event(ap_wl_rx_ev), .wl_tx_event(ap_wl_tx_ev),
    .wl_rx_ts_valid(ap_wl_rx_v), .wl_rx_ts(ap_wl_rx_ts),
    .wl_tx_ts_valid(ap_wl_tx_v), .wl_tx_ts(ap_wl_tx_ts), .wl_ts_overrun(ap_wl_ovr)
  );

  // ---------------- the end device ----------------------------------------
  logic             sta_cmd_valid = 1'b0;
  phc_cmd_t         sta_cmd = '0;
  ptp_time_t        sta_time, sta_rx_ts, sta_tx_ts;
  logic [INC_W-1:0] sta_inc;
  logic             sta_pps, sta_rx_ev = 1'b0, sta_tx_ev = 1'b0;
  logic             sta_rx_v, sta_tx_v, sta_rx_stb, sta_tx_stb, sta_rx_ovr, sta_tx_ovr;

  phc #(.NOMINAL_INC(STA_INC)) u_sta_phc (
    .clk(clk_sta), .rst_n, .cmd_valid(sta_cmd_valid), .cmd(sta_cmd),
    .time_o(sta_time), .inc_o(sta_inc), .pps_o(sta_pps)
  );
  ts_unit #(.RES_CYCLES(8), .CAL_NS(-25)) u_sta_rx (
    .clk(clk_sta), .rst_n, .phc(sta_time), .event_i(sta_rx_ev),
    .strobe_o(sta_rx_stb), .ts_valid_o(sta_rx_v), .ts_o(sta_rx_ts), .overrun_o(sta_rx_ovr)
  );
  ts_unit #(.RES_CYCLES(1)) u_sta_tx (
    .clk(clk_sta), .rst_n, .phc(sta_time), .event_i(sta_tx_ev),
    .strobe_o(sta_tx_stb), .ts_valid_o(sta_tx_v), .ts_o(sta_tx_ts), .overrun_o(sta_tx_ovr)
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

  function automatic longint to_ns(ptp_time_t t);
    return longint'(t.sec) * NPS + longint'(t.ns);
  endfunction

  realtime last_ap_edge = 0, last_sta_edge = 0;
  always @(posedge clk_mtsn) last_ap_edge = $realtime;
  always @(posedge clk_sta)  last_sta_edge = $realtime;

  // STA minus AP at this instant, each extrapolated from its last edge
  function automatic real clock_error();
    return real'(to_ns(sta_time) - to_ns(ap_time))
         + ($realtime - last_sta_edge) - ($realtime - last_ap_edge);
  endfunction

  // ---------------- radio frame helpers -----------------------------------
  int max_dm = 0;
  real mu_tab [2][NSCEN];   // [two_way][scenario]
  real mu_air [2][2];       // [two_way][0.5 m, 10 m]

  function automatic int multipath();
    if (max_dm > 0 && $urandom_range(0, 3) == 0) return $urandom_range(0, max_dm);
    return 0;
  endfunction

  // AP transmits: returns t1 and the real departure instant
  task automatic ap_send(output longint t1, output realtime dep);
    @(negedge clk_wl);
    ap_wl_tx_ev = 1'b1;
    @(posedge clk_wl);
    dep = $realtime;
    #0.1 ap_wl_tx_ev = 1'b0;
    wait (ap_wl_tx_v);
    t1 = to_ns(ap_wl_tx_ts);
  endtask

  task automatic sta_send(output longint t3, output realtime dep);
    @(negedge clk_sta);
    sta_tx_ev = 1'b1;
    @(posedge clk_sta);
    dep = $realtime;
    #0.1 sta_tx_ev = 1'b0;
    wait (sta_tx_v);
    t3 = to_ns(sta_tx_ts);
  endtask

  // frame reaches the STA receiver at dep + delay: preamble detected at the
  // next clock edge, stamped on the sample grid
  task automatic sta_receive(input realtime dep, input int delay, output longint t2);
    #(dep + delay - $realtime);
    sta_rx_ev = 1'b1;
    @(posedge clk_sta);
    #0.1 sta_rx_ev = 1'b0;
    wait (sta_rx_v);
    t2 = to_ns(sta_rx_ts);
  endtask

  task automatic ap_receive(input realtime dep, input int delay, output longint t4);
    #(dep + delay - $realtime);
    ap_wl_rx_ev = 1'b1;
    @(posedge clk_wl);
    #0.1 ap_wl_rx_ev = 1'b0;
    wait (ap_wl_rx_v);
    t4 = to_ns(ap_wl_rx_ts);
  endtask

  task automatic sta_command(input phc_op_e op, input int step, input logic [INC_W-1:0] inc);
    @(negedge clk_sta);
    sta_cmd.op      = op;
    sta_cmd.step_ns = step;
    sta_cmd.inc     = inc;
    sta_cmd_valid   = 1'b1;
    @(negedge clk_sta);
    sta_cmd_valid   = 1'b0;
  endtask

  // ---------------- one scenario -------------------------------------------
  task automatic run(input bit two_way, input int scen, input int n_ex, input realtime period,
                     input int prop, output real mu);
    real    kp, ki, integ, off, adj, e, sum, sum2, emax, sd, bound;
    longint t1, t2, t3, t4;
    realtime dep, start;
    int     ns;
    kp = two_way ? 0.7 : 0.1;
    ki = two_way ? 0.3 : 0.01;
    max_dm = DM_TAB[scen];
    integ = 0.0;
    sum = 0.0; sum2 = 0.0; emax = 0.0; ns = 0;
    // STA starts unsynchronised: nominal oscillator, clock 12.3 us off
    sta_command(PHC_SET_INC, 0, STA_INC);
    sta_command(PHC_STEP, 12_345, '0);
    for (int k = 0; k < n_ex; k++) begin
      start = $realtime;
      // random start within the 50 ns sample period, so that the receivers'
      // sample phase differs from one exchange to the next
      #($urandom_range(0, 49));
      ap_send(t1, dep);
      sta_receive(dep, CH_NS + prop + multipath(), t2);
      if (two_way) begin
        #(2000 + $urandom_range(0, 49));
        sta_send(t3, dep);
        ap_receive(dep, CH_NS + prop + multipath(), t4);
        off = real'((t2 - t1) - (t4 - t3)) / 2.0;        // Eqs. (1), (2)
      end else begin
        off = real'(t2 - t1 - CH_NS);                      // one-way, pre-calibrated
      end
      if (k == 0) begin
        sta_command(PHC_STEP, -int'(off), '0);
      end else begin
        integ += ki * off;
        adj = -(kp * off + integ) / real'(period);
        sta_command(PHC_SET_INC, 0, INC_W'(longint'(real'(STA_INC) * (1.0 + adj))));
      end
      #(start + period / 2 - $realtime);
      if (k >= n_ex / 2) begin
        e = clock_error();
        sum += e; sum2 += e * e; ns++;
        if (e > emax) emax = e;
        if (-e > emax) emax = -e;
      end
      #(start + period - $realtime);
    end
    mu = sum / ns;
    sd = (sum2 / ns - mu * mu > 0.0) ? $sqrt(sum2 / ns - mu * mu) : 0.0;
    bound = 16.0 + 25.0 + (two_way ? real'(max_dm) / 2.0 : real'(max_dm)) + 40.0 + real'(prop);
    $display("%-8s %-8s max_dm=%4d prop=%3d  mu=%7.1f ns  sigma=%6.1f ns  max|err|=%6.1f ns  bound=%6.1f ns",
             two_way ? "802.11" : "w-SHARP", NAME_TAB[scen], max_dm, prop, mu, sd, emax, bound);
    check(emax <= bound, "error within the hop bound");
    check(max_dm != 0 || prop != 0 || (mu > -10.0 && mu < 10.0 && sd < 25.0), "AWGN: small bias and spread");
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #30;
    rst_n = 1'b1;
    repeat (4) @(negedge clk_mtsn);
    @(negedge clk_mtsn);
    ap_cmd.op           = PHC_SET_TIME;
    ap_cmd.set_time.sec = 48'd1_700_000_000;
    ap_cmd.set_time.ns  = 32'd0;
    ap_cmd_valid        = 1'b1;
    @(negedge clk_mtsn);
    ap_cmd_valid        = 1'b0;
    // STA powers up with its own notion of time, 1.7e9 s as well
    sta_cmd.set_time    = ap_cmd.set_time;
    @(negedge clk_sta);
    sta_cmd.op = PHC_SET_TIME;
    sta_cmd_valid = 1'b1;
    @(negedge clk_sta);
    sta_cmd_valid = 1'b0;
    #1000;
    for (int s = 0; s < NSCEN; s++) run(1'b1, s, 60, 40_000.0, 0, mu_tab[1][s]);
    for (int s = 0; s < NSCEN; s++) run(1'b0, s, 150, 100_000.0, 0, mu_tab[0][s]);
    // over the air at 0.5 m and 10 m (1.7 and 33 ns of propagation on top of
    // the calibrated cable delay, no multipath)
    for (int tw = 0; tw < 2; tw++) begin
      run(tw[0], 0, tw ? 60 : 150, tw ? 40_000.0 : 100_000.0, 2, mu_air[tw][0]);
      run(tw[0], 0, tw ? 60 : 150, tw ? 40_000.0 : 100_000.0, 33, mu_air[tw][1]);
    end
    // two-way exchanges halve and average out the multipath delay; one-way
    // beacons carry it into the clock as a bias (largest for WLAN C)
    check(mu_tab[0][2] < mu_tab[0][1] && mu_tab[0][1] < mu_tab[0][3], "one-way bias grows with delay spread");
    check(mu_tab[0][2] < -50.0, "one-way: multipath bias in WLAN C");
    for (int s = 0; s < NSCEN; s++)
      check(mu_tab[1][s] > -25.0 && mu_tab[1][s] < 25.0, "two-way: no multipath bias");
    // the one-way beacon scheme cannot see the propagation delay: the 31 ns
    // extra at 10 m shows up in the mean; the two-way exchange removes it
    check(mu_air[0][0] - mu_air[0][1] > 21.0 && mu_air[0][0] - mu_air[0][1] < 41.0,
          "one-way: 10 m propagation biases the clock");
    check(mu_air[1][0] - mu_air[1][1] > -10.0 && mu_air[1][0] - mu_air[1][1] < 10.0,
          "two-way: propagation delay compensated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
