// jesd204b_rx: JESD204B Subclass 1 receiver, LINKS links of L lanes each.
//
// Top level of the receiver. It sits behind the transceivers (PHY), which
// deliver per lane and per clock four 8b/10b-decoded octets with their
// control-character and error flags, and it hands aligned, descrambled lane
// data to the fabric as a stream without backpressure (rx_data with
// rx_valid, plus rx_frame frame-start flags). One global_signals block
// synchronises reset_n and SYSREF; one lmfc_gen derives the local multiframe
// clock from SYSREF and is shared by all links so that they release data on
// the same multiframe boundaries. Each link has its own controller and SYNC~.
// Everything runs on the single clock clk, the transceiver user clock (line
// rate / 40; 320 MHz at 12.8 Gb/s).
// Parameters follow the paper's table: LINKS (up to 4), L (up to 4),
// F (4..32), K (1..32, F*K a multiple of 4 and at least 20), DESCRAMBLING,
// DATA_WIDTH (32 only). As in the paper, the wrapper limits a build to
// MAX_LANES = 4 lanes per link and MAX_LINKS = 4 links; the limits are
// parameters and may be raised, since the submodules take up to 32 lanes per
// link. Out-of-range parameters stop elaboration with an error.
module jesd204b_rx
  import jesd_pkg::*;
#(
  parameter int unsigned LINKS             = 1,
  parameter int unsigned L                 = 4,
  parameter int unsigned F                 = 16,
  parameter int unsigned K                 = 16,
  parameter bit          DESCRAMBLING      = 1'b1,
  parameter int unsigned DATA_WIDTH        = 32,
  parameter int unsigned BUFFER_DEPTH      = 128,
  parameter int unsigned K_MIN_OCTETS      = 4,
  parameter int unsigned RESET_CYCLES      = 16,
  parameter int unsigned CGS_STABLE_CYCLES = 8,
  parameter int unsigned ERR_THRESHOLD     = 4,
  parameter int unsigned ILAS_TIMEOUT      = 4096,
  parameter int unsigned MAX_LANES         = 4,
  parameter int unsigned MAX_LINKS         = 4
) (
  input  logic                                clk,
  input  logic                                reset_n,
  input  logic                                sysref,
  input  gt_word_t    [LINKS-1:0][L-1:0]      gtx,
  input  logic        [LINKS-1:0]             rx_reset_done,
  output logic        [LINKS-1:0][L*DATA_WIDTH-1:0] rx_data,
  output logic        [LINKS-1:0]             rx_valid,
  output logic        [LINKS-1:0][3:0]        rx_frame,
  output logic        [LINKS-1:0]             sync,
  output logic        [LINKS-1:0]             gtx_en_char_align,
  output logic        [LINKS-1:0]             rx_reset_gt,
  output link_state_t [LINKS-1:0]             link_state,
  output ilas_cfg_t   [LINKS-1:0][L-1:0]      ilas_cfg,
  output logic        [LINKS-1:0][L-1:0]      ilas_err,
  output logic        [LINKS-1:0]             buffer_overflow,
  output logic                                lmfc_locked
);
  if (DATA_WIDTH != 32) begin : g_bad_width
    $error("jesd204b_rx: only DATA_WIDTH = 32 is supported");
  end
  if (L < 1 || L > MAX_LANES || L > 32) begin : g_bad_lanes
    $error("jesd204b_rx: L must be 1 .. MAX_LANES (at most 32)");
  end
  if (LINKS < 1 || LINKS > MAX_LINKS) begin : g_bad_links
    $error("jesd204b_rx: LINKS must be 1 .. MAX_LINKS");
  end
  if (F < 4 || F > 32 || K < 1 || K > 32) begin : g_bad_fk
    $error("jesd204b_rx: F must be 4 .. 32 and K 1 .. 32");
  end

  logic rst, sysref_edge, lmfc_tick;
  logic [$clog2(F*K/4+1)-1:0] lmfc_cnt;

  global_signals u_glob (.clk, .reset_n, .sysref, .rst, .sysref_edge);

  lmfc_gen #(.F(F), .K(K)) u_lmfc (
    .clk, .rst, .sysref_edge, .lmfc_tick, .lmfc_locked, .lmfc_cnt
  );

  for (genvar k = 0; k < LINKS; k++) begin : g_link
    jesd204b_link #(
      .L(L), .F(F), .K(K), .DESCRAMBLING(DESCRAMBLING),
      .BUFFER_DEPTH(BUFFER_DEPTH), .K_MIN_OCTETS(K_MIN_OCTETS),
      .RESET_CYCLES(RESET_CYCLES), .CGS_STABLE_CYCLES(CGS_STABLE_CYCLES),
      .ERR_THRESHOLD(ERR_THRESHOLD), .ILAS_TIMEOUT(ILAS_TIMEOUT)
    ) u_link (
      .clk, .rst, .lmfc_tick, .lmfc_locked,
      .gtx(gtx[k]), .rx_reset_done(rx_reset_done[k]),
      .rx_data(rx_data[k]), .rx_valid(rx_valid[k]), .rx_frame(rx_frame[k]),
      .sync_n(sync[k]), .gtx_en_char_align(gtx_en_char_align[k]),
      .rx_reset_gt(rx_reset_gt[k]), .state(link_state[k]),
      .ilas_cfg(ilas_cfg[k]), .lane_ilas_err(ilas_err[k]),
      .buffer_overflow(buffer_overflow[k])
    );
  end
endmodule
