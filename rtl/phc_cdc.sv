// phc_cdc - carries the PHC time from the Ethernet (clk_src, 125 MHz) clock
// domain into the wireless (clk_dst, 160 MHz) clock domain.
//
// Structure, following the synchroniser drawn in the source figure:
//   source side  A divide-by-DIV counter. Every DIV-th source cycle the
//                downsample register ("/4") captures the PHC time and a
//                toggle flip-flop inverts, so the captured value is held
//                stable for DIV source periods (4 x 8 ns = 32 ns = T_Src).
//   dest side    Three flip-flops in series on clk_dst: two synchronise the
//                toggle, the third delays it. When the last two differ, the
//                enable of the destination register is high for one cycle;
//                the register takes the held time and data_valid (the
//                enable, one flop later) rises together with the new value.
// The scheme needs the held value to outlive the synchroniser latency
// (2..3 destination periods plus capture), which is the source's condition
// T_Src >= 4 T_Dst (32 ns >= 25 ns here).
//
// Calibration: the held time is the source time plus CAL_NS = T_Src/2, so
// that the destination copy, which lags the true time by 0..T_Src as in the
// source's quantisation model, has zero mean error. On top of that, this
// circuit has a fixed pipeline lag the model leaves out: the downsample
// register takes the clock value of the previous source edge (one source
// period, 8 ns) and the copy lands on average 2.5 destination periods after
// the toggle (15.6 ns). SYNC_COMP_NS = 24 adds that lag back, so the
// translation error is zero-mean as the model intends. Both constants are
// added on the source side before the downsample register. Where they are
// added, and the second constant, are this design's choices.
//
// Timing: phc_dst changes at most once every DIV source periods, on a
// clk_dst edge, and stays constant in between; data_valid is a one-cycle
// pulse in the clk_dst domain marking each update.
//
// Follows the source figure: the /4 register, the toggle, the three
// destination flip-flops, the enabled destination register and the
// data_valid flop. This design's choices: the toggle inverts on the same
// enable as the /4 register (the text requires the 31.25 MHz rate), the
// change detector is taken between the second and third destination flops,
// and the reset values.
`timescale 1ns/1ps
module phc_cdc
  import tsn_time_pkg::*;
#(
  parameter int unsigned DIV    = 4,
  parameter int unsigned CAL_NS = 16,
  parameter int unsigned SYNC_COMP_NS = 24
) (
  input  logic      clk_src,
  input  logic      rst_src_n,
  input  ptp_time_t phc_src,
  input  logic      clk_dst,
  input  logic      rst_dst_n,
  output ptp_time_t phc_dst,
  output logic      data_valid
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  // ---------------- source domain ----------------
  logic [CW-1:0] div_cnt;
  logic          div_en;
  ptp_time_t     held_q;
  logic          tgl_q;

  assign div_en = (div_cnt == CW'(DIV - 1));

  always_ff @(posedge clk_src or negedge rst_src_n) begin
    if (!rst_src_n) begin
      div_cnt <= '0;
      held_q  <= '0;
      tgl_q   <= 1'b0;
    end else begin
      div_cnt <= div_en ? '0 : div_cnt + 1'b1;
      if (div_en) begin
        held_q <= time_add_ns(phc_src, 32'(CAL_NS + SYNC_COMP_NS));
        tgl_q  <= ~tgl_q;
      end
    end
  end

  // ---------------- destination domain ----------------
  logic      s1_q, s2_q, s3_q;
  logic      en;
  ptp_time_t dst_q;
  logic      dv_q;

  assign en = s2_q ^ s3_q;

  always_ff @(posedge clk_dst or negedge rst_dst_n) begin
    if (!rst_dst_n) begin
      s1_q  <= 1'b0;
      s2_q  <= 1'b0;
      s3_q  <= 1'b0;
      dst_q <= '0;
      dv_q  <= 1'b0;
    end else begin
      s1_q <= tgl_q;
      s2_q <= s1_q;
      s3_q <= s2_q;
      if (en) dst_q <= held_q;
      dv_q <= en;
    end
  end

  assign phc_dst    = dst_q;
  assign data_valid = dv_q;

endmodule
