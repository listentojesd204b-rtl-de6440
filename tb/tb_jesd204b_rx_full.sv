// tb_jesd204b_rx_full: the receiver at its default parameters (1 link,
// 4 lanes, F = 16, K = 16, scrambling on, 128-word buffers) taken through
// one complete start-up: GT reset, CGS, ILAS and 2000 words of user data on
// skewed and octet-shifted lanes, all compared with the transmitted data.
// It also checks the captured ILAS configuration and reports the cycles
// from SYNC~ release to the first valid output word.
`timescale 1ns/1ps
module tb_jesd204b_rx_full;
  import jesd_pkg::*;
  import jesd_tb_pkg::*;

  localparam int unsigned L = 4, F = 16, K = 16, MFW = F * K / 4;

  logic clk = 0, reset_n = 1, sysref = 0;
  initial #0.5 reset_n = 0;       // asynchronous reset before the first edge
  always #1.5625 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  gt_word_t    [0:0][L-1:0] gtx;
  logic        [0:0]        rx_reset_done, rx_valid, sync, en_ca, rst_gt, ovf;
  logic        [0:0][32*L-1:0] rx_data;
  logic        [0:0][3:0]   rx_frame;
  link_state_t [0:0]        st;
  ilas_cfg_t   [0:0][L-1:0] cfg;
  logic        [0:0][L-1:0] ilas_err;
  logic                     lmfc_locked;

  jesd204b_rx dut (
    .clk, .reset_n, .sysref, .gtx, .rx_reset_done, .rx_data, .rx_valid,
    .rx_frame, .sync, .gtx_en_char_align(en_ca), .rx_reset_gt(rst_gt),
    .link_state(st), .ilas_cfg(cfg), .ilas_err, .buffer_overflow(ovf), .lmfc_locked
  );

  int unsigned skew [L] = '{3, 0, 6, 1};
  int unsigned rot  [L] = '{1, 2, 0, 3};
  int unsigned sent;
  jesd_tx_model #(.L(L), .F(F), .K(K), .SCR(1), .LINK(0)) u_tx (
    .clk, .sysref, .sync_n(sync[0]), .skew, .rot, .dec_err('0), .bad_fchk(1'b0),
    .gtx(gtx[0]), .data_words_sent(sent)
  );

  int gt_cnt;
  always @(posedge clk) begin
    if (rst_gt[0]) begin gt_cnt <= 0; rx_reset_done[0] <= 1'b0; end
    else if (gt_cnt < 10) gt_cnt <= gt_cnt + 1;
    else rx_reset_done[0] <= 1'b1;
  end

  always @(posedge clk)
    sysref <= ((cycle % (4 * MFW)) >= 20) && ((cycle % (4 * MFW)) < 22);

  int c_chk, c_fail, c_words, c_frames;
  logic first_valid;
  tb_link_check #(.L(L), .F(F), .LINK(0)) u_chk (
    .clk, .rx_data(rx_data[0]), .rx_valid(rx_valid[0]), .rx_frame(rx_frame[0]),
    .state(st[0]), .checks(c_chk), .failures(c_fail), .words(c_words),
    .frame_flags(c_frames), .first_valid(first_valid)
  );

  longint t_sync = -1, t_first = -1;
  always @(posedge clk) begin
    if (t_sync < 0 && sync[0]) t_sync = cycle;
    if (t_first < 0 && first_valid) t_first = cycle;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    reset_n = 1;
    while (c_words < 2000) @(posedge clk);
    for (int l = 0; l < L; l++) begin
      checks++;
      if (cfg[0][l].lid != 5'(l) || cfg[0][l].l_m1 != 5'(L - 1) || cfg[0][l].scr != 1'b1
          || cfg[0][l].subclassv != 3'd1 || ilas_err[0][l]) begin
        failures++; $display("lane %0d: ILAS configuration wrong", l);
      end
    end
    checks++;
    if (ovf[0]) begin failures++; $display("buffer overflow"); end
    checks += c_chk; failures += c_fail;
    $display("SYNC~ released at cycle %0d, first valid word %0d cycles later (ILAS is %0d words)",
             t_sync, t_first - t_sync, 4 * MFW);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
