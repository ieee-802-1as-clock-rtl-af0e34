// tb_domain_translator - end-to-end testbench of the domain translator at
// its default parameters (125 MHz Ethernet clock, 160 MHz radio clock).
//
// The testbench acts as the host software and as the switch / modem event
// sources. It keeps its own copy of the clock (64-bit ns count, advanced
// 8 ns per Ethernet cycle and by the commands it issues), and checks:
//   - the shared clock after set time, offset steps and a frequency change,
//     and the PPS rising edge at each second boundary;
//   - Ethernet rx/tx timestamps equal the clock at the event cycle (8 ns);
//   - the radio-side copy updates every 32 ns and tracks the clock within
//     +-24 ns (T_Src/2 plus one radio cycle of synchroniser jitter);
//   - radio tx timestamps equal the radio copy at the event cycle, radio rx
//     timestamps fall on the 50 ns sample grid, and an Ethernet and a radio
//     event at the same instant get timestamps that agree within the bound
//     (the time translation between the two domains);
//   - merged events raise the overrun flags.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
module tb_domain_translator;
  import tsn_time_pkg::*;

  localparam longint NPS = 64'd1_000_000_000;

  logic             clk_mtsn = 1'b0, clk_wireless = 1'b0;
  logic             rst_mtsn_n = 1'b0, rst_wireless_n = 1'b0;
  logic             phc_cmd_valid = 1'b0;
  phc_cmd_t         phc_cmd = '0;
  ptp_time_t        phc_time;
  logic [INC_W-1:0] phc_inc;
  logic             pps_out;
  logic             eth_rx_event = 1'b0, eth_tx_event = 1'b0;
  logic             eth_rx_ts_valid, eth_tx_ts_valid, eth_ts_overrun;
  ptp_time_t        eth_rx_ts, eth_tx_ts;
  ptp_time_t        phc_wireless;
  logic             phc_wireless_valid, wl_sample_strobe;
  logic             wl_rx_event = 1'b0, wl_tx_event = 1'b0;
  logic             wl_rx_ts_valid, wl_tx_ts_valid, wl_ts_overrun;
  ptp_time_t        wl_rx_ts, wl_tx_ts;

  domain_translator dut (.*);

  always #4 clk_mtsn = ~clk_mtsn;
  initial begin
    #0.7;
    forever #3.125 clk_wireless = ~clk_wireless;
  end

  int checks = 0;
  int failures = 0;
  // mechanism counters
  int n_set = 0, n_step = 0, n_inc = 0, n_pps = 0, n_cdc = 0;
  int n_eth_rx = 0, n_eth_tx = 0, n_wl_rx = 0, n_wl_tx = 0, n_pair = 0;
  int n_eth_ovr = 0, n_wl_ovr = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic longint to_ns(ptp_time_t t);
    return longint'(t.sec) * NPS + longint'(t.ns);
  endfunction

  // ---------------- host model of the clock (clk_mtsn domain) -------------
  longint           ref_ns = 0;
  logic [31:0]      ref_frac = '0;
  logic [INC_W-1:0] ref_inc = INC_8NS;
  realtime          last_mtsn_edge = 0;
  always @(posedge clk_mtsn) if (rst_mtsn_n) begin
    logic [32:0] f;
    last_mtsn_edge = $realtime;
    if (phc_cmd_valid && phc_cmd.op == PHC_SET_TIME) begin
      ref_ns   = to_ns(phc_cmd.set_time);
      ref_frac = '0;
    end else begin
      f        = {1'b0, ref_frac} + {1'b0, ref_inc[31:0]};
      ref_frac = f[31:0];
      ref_ns   = ref_ns + longint'(ref_inc[39:32]) + longint'(f[32]);
      if (phc_cmd_valid && phc_cmd.op == PHC_STEP)    ref_ns = ref_ns + longint'(phc_cmd.step_ns);
      if (phc_cmd_valid && phc_cmd.op == PHC_SET_INC) ref_inc = phc_cmd.inc;
    end
  end

  // ---------------- Ethernet side monitor ---------------------------------
  logic       pps_d = 1'b1;
  logic [47:0] sec_d = '0;
  longint     eth_rx_exp[$], eth_tx_exp[$];
  always @(negedge clk_mtsn) if (rst_mtsn_n) begin
    check(to_ns(phc_time) == ref_ns, "shared clock value");
    check(pps_out == (phc_time.ns < 100_000_000), "pps level");
    if (pps_out && !pps_d) begin
      n_pps++;
      check(phc_time.sec == sec_d + 1, "pps rises as the second starts");
    end
    if (eth_rx_ts_valid) begin
      n_eth_rx++;
      check(eth_rx_exp.size() > 0 && to_ns(eth_rx_ts) == eth_rx_exp.pop_front(), "eth rx timestamp");
    end
    if (eth_tx_ts_valid) begin
      n_eth_tx++;
      check(eth_tx_exp.size() > 0 && to_ns(eth_tx_ts) == eth_tx_exp.pop_front(), "eth tx timestamp");
    end
    if (eth_ts_overrun) n_eth_ovr++;
    pps_d = pps_out;
    sec_d = phc_time.sec;
  end
  // the clock value at the edge that takes an event
  always @(posedge clk_mtsn) if (rst_mtsn_n) begin
    if (eth_rx_event) eth_rx_exp.push_back(to_ns(phc_time));
    if (eth_tx_event) eth_tx_exp.push_back(to_ns(phc_time));
  end

  // ---------------- radio side monitor ------------------------------------
  longint    wl_tx_exp[$];
  longint    last_cdc = 0;
  bit        cdc_seen = 1'b0;
  bit        quiet = 1'b0;     // no host commands in flight (bounds hold)
  int        wl_cyc = 0, strobe_phase = -1;
  longint    pair_eth_ns, pair_wl_ns;
  longint    last_wl_rx = 0;
  logic      strobe_d = 1'b0;
  always @(posedge clk_wireless) if (rst_wireless_n) begin
    if (wl_tx_event) wl_tx_exp.push_back(to_ns(phc_wireless));
  end
  always @(negedge clk_wireless) if (rst_wireless_n) begin
    wl_cyc++;
    if (phc_wireless_valid) begin
      n_cdc++;
      if (cdc_seen && quiet) check(to_ns(phc_wireless) - last_cdc == 32, "radio copy advances 32 ns per update");
      last_cdc = to_ns(phc_wireless);
      cdc_seen = 1'b1;
    end
    if (cdc_seen && quiet) begin
      real err;
      err = real'(to_ns(phc_wireless) - ref_ns) - ($realtime - last_mtsn_edge - 3.125);
      check(err >= -24.0 && err <= 24.0, "radio copy within translation bound");
    end
    if (wl_sample_strobe) begin
      if (strobe_phase >= 0) check((wl_cyc % 8) == strobe_phase, "20 MHz sample strobe every 8 cycles");
      else strobe_phase = wl_cyc % 8;
    end
    if (wl_tx_ts_valid) begin
      n_wl_tx++;
      check(wl_tx_exp.size() > 0 && to_ns(wl_tx_ts) == wl_tx_exp.pop_front(), "radio tx timestamp");
    end
    if (wl_rx_ts_valid) begin
      n_wl_rx++;
      check(strobe_d, "radio rx timestamp taken on a sample strobe");
      last_wl_rx = to_ns(wl_rx_ts);
    end
    if (wl_ts_overrun) n_wl_ovr++;
    strobe_d = wl_sample_strobe;
  end

  // ---------------- stimulus ----------------------------------------------
  task automatic host_cmd(input phc_op_e op, input longint t, input int step, input logic [INC_W-1:0] inc);
    quiet = 1'b0;
    @(negedge clk_mtsn);
    phc_cmd.op           = op;
    phc_cmd.set_time.sec = 48'(t / NPS);
    phc_cmd.set_time.ns  = 32'(t % NPS);
    phc_cmd.step_ns      = step;
    phc_cmd.inc          = inc;
    phc_cmd_valid        = 1'b1;
    @(negedge clk_mtsn);
    phc_cmd_valid        = 1'b0;
  endtask

  task automatic settle();
    quiet = 1'b0;
    cdc_seen = 1'b0;
    repeat (12) @(negedge clk_mtsn);
    quiet = 1'b1;
  endtask

  task automatic pulse_eth(input bit rx, input bit tx);
    @(negedge clk_mtsn);
    eth_rx_event = rx;
    eth_tx_event = tx;
    @(negedge clk_mtsn);
    eth_rx_event = 1'b0;
    eth_tx_event = 1'b0;
  endtask

  task automatic pulse_wl(input bit rx, input bit tx);
    @(negedge clk_wireless);
    wl_rx_event = rx;
    wl_tx_event = tx;
    @(negedge clk_wireless);
    wl_rx_event = 1'b0;
    wl_tx_event = 1'b0;
  endtask

  initial begin
    #400_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #30;
    rst_mtsn_n = 1'b1;
    rst_wireless_n = 1'b1;
    settle();

    // host sets the time 3 us before second 1700000000
    host_cmd(PHC_SET_TIME, 64'd1_700_000_000 * NPS - 3000, 0, '0);
    n_set++;
    settle();
    repeat (500) @(negedge clk_mtsn);          // crosses the second: PPS

    // timestamps in both domains, also a same-instant pair
    for (int k = 0; k < 60; k++) begin
      fork
        pulse_eth(k % 2 == 0, k % 3 == 0);
        pulse_wl(k % 2 == 1, k % 4 == 0);
      join
      repeat ($urandom_range(5, 40)) @(negedge clk_mtsn);
    end

    // same-instant pair: Ethernet tx and radio rx raised at the same time
    for (int k = 0; k < 20; k++) begin
      @(posedge clk_mtsn);
      #0.5;
      fork
        begin
          eth_tx_event = 1'b1;
          @(posedge clk_mtsn);
          #0.5 eth_tx_event = 1'b0;
          wait (eth_tx_ts_valid);
          pair_eth_ns = to_ns(eth_tx_ts);
        end
        begin
          wl_rx_event = 1'b1;
          @(posedge clk_wireless);
          #0.5 wl_rx_event = 1'b0;
          wait (wl_rx_ts_valid);
          pair_wl_ns = to_ns(wl_rx_ts);
          @(negedge clk_wireless);
        end
      join
      // radio rx stamp: +-25 ns (centred sample grid), one radio cycle to take
      // the event, +-24 ns translation error
      check(pair_wl_ns - pair_eth_ns >= -52 && pair_wl_ns - pair_eth_ns <= 56,
            "same-instant events agree across the domains");
      n_pair++;
      repeat ($urandom_range(3, 20)) @(negedge clk_mtsn);
    end

    // offset correction by the servo, both signs
    host_cmd(PHC_STEP, 0, 1234, '0);
    n_step++;
    settle();
    repeat (50) @(negedge clk_mtsn);
    host_cmd(PHC_STEP, 0, -777, '0);
    n_step++;
    settle();

    // frequency correction: +100 ppm of 8 ns
    host_cmd(PHC_SET_INC, 0, 0, INC_8NS + 40'(64'd3_435_974)); // 8 ns * 1e-4 * 2^32
    n_inc++;
    quiet = 1'b0;
    repeat (3000) @(negedge clk_mtsn);
    check(phc_inc == INC_8NS + 40'(64'd3_435_974), "increment readback");

    // merged events on both sides
    @(negedge clk_mtsn);
    eth_rx_event = 1'b1;
    @(negedge clk_mtsn);
    @(negedge clk_mtsn);
    eth_rx_event = 1'b0;
    // with a resolution of one cycle both edges are stamped: no merge
    repeat (20) @(negedge clk_mtsn);
    @(negedge clk_wireless);
    wl_rx_event = 1'b1;
    @(negedge clk_wireless);
    wl_rx_event = 1'b1;
    @(negedge clk_wireless);
    wl_rx_event = 1'b0;
    repeat (40) @(negedge clk_wireless);

    // second boundary again after a set time
    host_cmd(PHC_SET_TIME, 64'd1_700_000_002 * NPS - 800, 0, '0);
    n_set++;
    repeat (300) @(negedge clk_mtsn);

    check(n_set > 0,    "mechanism: set time");
    check(n_step > 0,   "mechanism: offset step");
    check(n_inc > 0,    "mechanism: frequency correction");
    check(n_pps >= 2,   "mechanism: PPS at second boundary");
    check(n_cdc > 1000, "mechanism: CDC updates");
    check(n_eth_rx > 0 && n_eth_tx > 0, "mechanism: Ethernet timestamps");
    check(n_wl_rx > 0 && n_wl_tx > 0,   "mechanism: radio timestamps");
    check(n_pair > 0,   "mechanism: cross-domain timestamp pair");
    check(n_wl_ovr > 0, "mechanism: radio timestamp merge");
    $display("set=%0d step=%0d inc=%0d pps=%0d cdc=%0d eth_rx=%0d eth_tx=%0d wl_rx=%0d wl_tx=%0d pairs=%0d eth_ovr=%0d wl_ovr=%0d",
             n_set, n_step, n_inc, n_pps, n_cdc, n_eth_rx, n_eth_tx, n_wl_rx, n_wl_tx, n_pair, n_eth_ovr, n_wl_ovr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
