// jesd204b_link: one JESD204B Subclass 1 receive link of L lanes.
//
// L data_path instances (one per lane) share one control_fsm, one
// buffer_release and one frame_marker. The LMFC comes from outside so that
// several links can share it. rx_data carries lane i in bits [32*i +: 32],
// octet 0 of each lane in the low byte; rx_valid is high for words of user
// data, which arrive every clock once the link is synchronised (no
// backpressure, as in the paper). rx_frame[i] flags octet i of the words as
// the first octet of a frame. sync_n is the link's SYNC~ (active low) towards
// the transmitter; gtx_en_char_align and rx_reset_gt go to the transceivers.
// Timing: rx_data/rx_valid come from the lanes' output registers; the lanes
// are released together, so all lanes of a word belong to the same frames.
module jesd204b_link
  import jesd_pkg::*;
#(
  parameter int unsigned L                 = 4,
  parameter int unsigned F                 = 16,
  parameter int unsigned K                 = 16,
  parameter bit          DESCRAMBLING      = 1'b1,
  parameter int unsigned BUFFER_DEPTH      = 128,
  parameter int unsigned K_MIN_OCTETS      = 4,
  parameter int unsigned RESET_CYCLES      = 16,
  parameter int unsigned CGS_STABLE_CYCLES = 8,
  parameter int unsigned ERR_THRESHOLD     = 4,
  parameter int unsigned ILAS_TIMEOUT      = 4096
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              lmfc_tick,
  input  logic              lmfc_locked,
  input  gt_word_t [L-1:0]  gtx,
  input  logic              rx_reset_done,
  output logic [32*L-1:0]   rx_data,
  output logic              rx_valid,
  output logic [3:0]        rx_frame,
  output logic              sync_n,
  output logic              gtx_en_char_align,
  output logic              rx_reset_gt,
  output link_state_t       state,
  output ilas_cfg_t [L-1:0] ilas_cfg,
  output logic [L-1:0]      lane_ilas_err,
  output logic              buffer_overflow
);
  logic [L-1:0] cgs_done, ilas_done, aligned, buf_ready, ovf, dec_err;
  logic [L-1:0] out_is_data, out_valid;
  logic         lane_clear, cgs_stable, ilas_enable, synced;
  logic         release_o, release_pulse, first_out;

  assign buffer_overflow = |ovf;

  control_fsm #(
    .L(L), .RESET_CYCLES(RESET_CYCLES), .CGS_STABLE_CYCLES(CGS_STABLE_CYCLES),
    .ERR_THRESHOLD(ERR_THRESHOLD), .ILAS_TIMEOUT(ILAS_TIMEOUT)
  ) u_ctrl (
    .clk, .rst, .rx_reset_done, .lmfc_tick, .lmfc_locked,
    .lane_cgs_done(cgs_done), .lane_ilas_done(ilas_done),
    .lane_ilas_err(lane_ilas_err), .lane_dec_err(dec_err),
    .buffers_released(release_o), .buffer_overflow,
    .state, .sync_n, .gtx_en_char_align, .rx_reset_gt, .lane_clear,
    .cgs_stable, .ilas_enable, .synced
  );

  buffer_release #(.L(L)) u_rel (
    .clk, .rst, .restart(lane_clear),
    .enable(state == ST_ILAS || state == ST_SYNCED),
    .lmfc_tick, .lane_ready(buf_ready), .release_o, .release_pulse
  );

  for (genvar i = 0; i < L; i++) begin : g_lane
    data_path #(
      .L(L), .F(F), .K(K), .DESCRAMBLING(DESCRAMBLING),
      .BUFFER_DEPTH(BUFFER_DEPTH), .K_MIN_OCTETS(K_MIN_OCTETS)
    ) u_dp (
      .clk, .rst, .gtx(gtx[i]),
      .lane_clear, .align_hold(state == ST_CGS), .ilas_enable,
      .buf_release(release_o),
      .cgs_done(cgs_done[i]), .ilas_done(ilas_done[i]), .ilas_err(lane_ilas_err[i]),
      .ilas_cfg(ilas_cfg[i]), .aligned(aligned[i]), .buf_ready(buf_ready[i]),
      .buf_overflow(ovf[i]), .dec_err(dec_err[i]),
      .out_data(rx_data[32*i +: 32]), .out_is_data(out_is_data[i]),
      .out_valid(out_valid[i])
    );
  end

  // The first released word leaves the output register two cycles after the
  // release pulse.
  logic [1:0] rel_d;
  always_ff @(posedge clk) begin
    if (rst || lane_clear) rel_d <= '0;
    else                   rel_d <= {rel_d[0], release_pulse};
  end
  assign first_out = rel_d[1];

  frame_marker #(.F(F)) u_fm (
    .clk, .rst, .start(first_out), .valid(out_valid[0]), .frame(rx_frame)
  );

  assign rx_valid = synced && (&out_is_data);
endmodule
