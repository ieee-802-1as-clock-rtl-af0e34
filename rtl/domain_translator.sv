// domain_translator - FPGA timing datapath of an Ethernet TSN / wireless
// domain translator (a boundary clock between a TSN switch and an 802.11 or
// w-SHARP modem).
//
// One PTP hardware clock serves both interfaces. It runs on clk_mtsn
// (125 MHz) next to the TSN switch, which timestamps its frames with it
// directly; the host's Ethernet-side PTP slave disciplines it through the
// phc_cmd port (set time, offset step, frequency). The radio modem runs on
// clk_wireless (160 MHz) and only reads the clock: phc_cdc downsamples the
// time by 4 (31.25 MHz), moves it across the clock boundary with a toggle
// synchroniser and presents it, calibrated to zero mean error, as
// phc_wireless.
// The modem's transmit timestamps are taken on its clock cycle; its receive
// timestamps are taken at the 20 MHz sample strobe (every 8th cycle), so
// they carry the 50 ns resolution of preamble detection.
//
//   clk_mtsn domain:     phc, Ethernet rx/tx ts_unit (RES 1 -> 8 ns), PPS
//   clk_wireless domain: CDC destination, wireless tx ts_unit (RES 1),
//                        wireless rx ts_unit (RES 8 -> 50 ns)
//
// The switch and modem themselves are outside this module: their frame
// events come in as one-cycle pulses (eth_*_event in clk_mtsn,
// wl_*_event in clk_wireless) and the timestamps go back out with a
// one-cycle valid. wl_sample_strobe tells the modem where the receive
// sample instants fall. Resets are asynchronous, one per clock domain.
//
// Following the source: the shared clock in the switch's clock domain, the
// read-only copy for the modem through the divide-by-4 synchroniser with
// T_Src/2 calibration, the timestamp resolutions (8 ns and 50 ns, receive
// only on the radio) and the PPS output. This design's choices: the port
// list, the command encoding, the timestamp hand-off, the 24 ns compensation
// of the synchroniser's pipeline lag and the -25 ns centring of radio receive
// stamps (both so that the translation and resolution errors are zero-mean,
// as the source's error model assumes). With one-cycle Ethernet resolution
// eth_ts_overrun can never rise, and the sample strobes of the
// one-cycle-resolution units (constant high) go unused.
`timescale 1ns/1ps
module domain_translator
  import tsn_time_pkg::*;
#(
  parameter logic [INC_W-1:0] PHC_NOMINAL_INC  = INC_8NS,
  parameter int unsigned      PPS_WIDTH_NS     = 100_000_000,
  parameter int unsigned      CDC_DIV          = 4,
  parameter int unsigned      CDC_CAL_NS       = 16,
  parameter int unsigned      CDC_SYNC_COMP_NS = 24,
  parameter int unsigned      ETH_RES_CYCLES   = 1,
  parameter int unsigned      WL_RX_RES_CYCLES = 8,
  parameter int unsigned      WL_TX_RES_CYCLES = 1,
  parameter int               WL_RX_CAL_NS     = -25
) (
  // Ethernet TSN (switch) clock domain
  input  logic             clk_mtsn,
  input  logic             rst_mtsn_n,
  input  logic             phc_cmd_valid,
  input  phc_cmd_t         phc_cmd,
  output ptp_time_t        phc_time,
  output logic [INC_W-1:0] phc_inc,
  output logic             pps_out,
  input  logic             eth_rx_event,
  input  logic             eth_tx_event,
  output logic             eth_rx_ts_valid,
  output ptp_time_t        eth_rx_ts,
  output logic             eth_tx_ts_valid,
  output ptp_time_t        eth_tx_ts,
  output logic             eth_ts_overrun,
  // wireless (modem) clock domain
  input  logic             clk_wireless,
  input  logic             rst_wireless_n,
  output ptp_time_t        phc_wireless,
  output logic             phc_wireless_valid,
  output logic             wl_sample_strobe,
  input  logic             wl_rx_event,
  input  logic             wl_tx_event,
  output logic             wl_rx_ts_valid,
  output ptp_time_t        wl_rx_ts,
  output logic             wl_tx_ts_valid,
  output ptp_time_t        wl_tx_ts,
  output logic             wl_ts_overrun
);

  logic eth_rx_ovr, eth_tx_ovr, wl_rx_ovr, wl_tx_ovr;
  logic eth_rx_stb, eth_tx_stb, wl_tx_stb;

  phc #(
    .NOMINAL_INC  (PHC_NOMINAL_INC),
    .PPS_WIDTH_NS (PPS_WIDTH_NS)
  ) u_phc (
    .clk       (clk_mtsn),
    .rst_n     (rst_mtsn_n),
    .cmd_valid (phc_cmd_valid),
    .cmd       (phc_cmd),
    .time_o    (phc_time),
    .inc_o     (phc_inc),
    .pps_o     (pps_out)
  );

  ts_unit #(.RES_CYCLES(ETH_RES_CYCLES)) u_eth_rx_ts (
    .clk        (clk_mtsn),
    .rst_n      (rst_mtsn_n),
    .phc        (phc_time),
    .event_i    (eth_rx_event),
    .strobe_o   (eth_rx_stb),
    .ts_valid_o (eth_rx_ts_valid),
    .ts_o       (eth_rx_ts),
    .overrun_o  (eth_rx_ovr)
  );

  ts_unit #(.RES_CYCLES(ETH_RES_CYCLES)) u_eth_tx_ts (
    .clk        (clk_mtsn),
    .rst_n      (rst_mtsn_n),
    .phc        (phc_time),
    .event_i    (eth_tx_event),
    .strobe_o   (eth_tx_stb),
    .ts_valid_o (eth_tx_ts_valid),
    .ts_o       (eth_tx_ts),
    .overrun_o  (eth_tx_ovr)
  );

  phc_cdc #(
    .DIV    (CDC_DIV),
    .CAL_NS       (CDC_CAL_NS),
    .SYNC_COMP_NS (CDC_SYNC_COMP_NS)
  ) u_cdc (
    .clk_src    (clk_mtsn),
    .rst_src_n  (rst_mtsn_n),
    .phc_src    (phc_time),
    .clk_dst    (clk_wireless),
    .rst_dst_n  (rst_wireless_n),
    .phc_dst    (phc_wireless),
    .data_valid (phc_wireless_valid)
  );

  ts_unit #(.RES_CYCLES(WL_RX_RES_CYCLES), .CAL_NS(WL_RX_CAL_NS)) u_wl_rx_ts (
    .clk        (clk_wireless),
    .rst_n      (rst_wireless_n),
    .phc        (phc_wireless),
    .event_i    (wl_rx_event),
    .strobe_o   (wl_sample_strobe),
    .ts_valid_o (wl_rx_ts_valid),
    .ts_o       (wl_rx_ts),
    .overrun_o  (wl_rx_ovr)
  );

  ts_unit #(.RES_CYCLES(WL_TX_RES_CYCLES)) u_wl_tx_ts (
    .clk        (clk_wireless),
    .rst_n      (rst_wireless_n),
    .phc        (phc_wireless),
    .event_i    (wl_tx_event),
    .strobe_o   (wl_tx_stb),
    .ts_valid_o (wl_tx_ts_valid),
    .ts_o       (wl_tx_ts),
    .overrun_o  (wl_tx_ovr)
  );

  // A timestamp unit merged two events (one-cycle pulse in its own domain).
  assign eth_ts_overrun = eth_rx_ovr | eth_tx_ovr;
  assign wl_ts_overrun  = wl_rx_ovr  | wl_tx_ovr;

endmodule
