// tb_jesd204b_link: one link of 2 lanes (F = 4, K = 32, scrambling on) with
// an LMFC tick generated by the testbench every 32 cycles, lanes skewed by
// 0 and 6 words and shifted by 1 and 3 octets. The link must reach
// ST_SYNCED, emit SYNC~ high, and deliver 500 words matching the
// transmitted data on both lanes with a frame flag on every word (F = 4).
// The first valid word must leave at a fixed offset from the LMFC tick
// after a second start-up with other skews.
`timescale 1ns/1ps
module tb_jesd204b_link;
  import jesd_pkg::*;
  import jesd_tb_pkg::*;
  localparam int unsigned L = 2, F = 4, K = 32, MFW = F * K / 4;
  logic clk = 0, rst = 1, sysref = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic lmfc_tick;
  assign lmfc_tick = (cyc % MFW) == 5;
  always @(posedge clk) sysref <= (cyc % MFW) == 3;   // aligns the model's LMFC

  gt_word_t [L-1:0] gtx;
  logic rx_reset_done, rx_valid, sync_n, en_ca, rst_gt, ovf;
  logic [32*L-1:0] rx_data;
  logic [3:0] rx_frame;
  link_state_t state;
  ilas_cfg_t [L-1:0] cfg;
  logic [L-1:0] ierr;
  logic [L-1:0] tx_err = '0;
  int unsigned skew [L] = '{0, 6};
  int unsigned rot  [L] = '{1, 3};
  int unsigned sent;
  int gt_cnt = 0;

  jesd_tx_model #(.L(L), .F(F), .K(K), .SCR(1), .LINK(0)) u_tx (
    .clk, .sysref, .sync_n, .skew, .rot, .dec_err(tx_err), .bad_fchk(1'b0), .gtx,
    .data_words_sent(sent)
  );

  jesd204b_link #(.L(L), .F(F), .K(K), .DESCRAMBLING(1), .BUFFER_DEPTH(64)) dut (
    .clk, .rst, .lmfc_tick, .lmfc_locked(1'b1), .gtx, .rx_reset_done, .rx_data,
    .rx_valid, .rx_frame, .sync_n, .gtx_en_char_align(en_ca), .rx_reset_gt(rst_gt),
    .state, .ilas_cfg(cfg), .lane_ilas_err(ierr), .buffer_overflow(ovf)
  );

  always @(posedge clk) begin
    if (rst_gt) begin gt_cnt <= 0; rx_reset_done <= 0; end
    else if (gt_cnt < 4) gt_cnt <= gt_cnt + 1;
    else rx_reset_done <= 1;
  end

  int c_chk, c_fail, c_words, c_frames;
  logic first_valid;
  tb_link_check #(.L(L), .F(F), .LINK(0)) u_chk (
    .clk, .rx_data, .rx_valid, .rx_frame, .state, .checks(c_chk), .failures(c_fail),
    .words(c_words), .frame_flags(c_frames), .first_valid
  );

  int phase [2];
  int nfirst = 0;
  always @(posedge clk) if (first_valid && nfirst < 2) begin
    phase[nfirst] = cyc % MFW;
    nfirst++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (c_words < 500) @(negedge clk);
    checks++; if (state != ST_SYNCED || !sync_n || c_frames != c_words) failures++;
    // Second start-up through decoding errors, with other skews.
    skew = '{5, 1};
    for (int i = 0; i < 5; i++) begin tx_err = 2'b01; @(negedge clk); tx_err = 0; @(negedge clk); end
    while (state == ST_SYNCED) @(negedge clk);
    while (c_words < 800) @(negedge clk);
    checks++;
    if (nfirst != 2 || phase[0] != phase[1]) begin
      failures++; $display("first-word phases %0d %0d", phase[0], phase[1]);
    end
    checks += c_chk; failures += c_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
