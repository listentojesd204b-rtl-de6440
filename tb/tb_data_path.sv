// tb_data_path: one lane (F = 8, K = 8, scrambling on, 32-word buffer) fed by
// the transmitter model with a 3-word delay and a 2-octet shift; the link
// control inputs are driven by hand. Checks: cgs_done during CGS; ILAS
// accepted and configuration captured; buf_ready after the ILAS starts;
// two cycles after buf_release the output shows the 64 ILAS words (not
// flagged as data) and then the descrambled user data in order; a
// disparity error at the input shows on dec_err two cycles later.
`timescale 1ns/1ps
module tb_data_path;
  import jesd_pkg::*;
  import jesd_tb_pkg::*;
  localparam int unsigned F = 8, K = 8, MFW = F * K / 4;
  logic clk = 0, rst = 1, sysref = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  gt_word_t [0:0] gtx;
  logic lane_clear = 1, align_hold = 1, ilas_enable = 0, buf_release = 0;
  logic cgs_done, ilas_done, ilas_err, aligned, buf_ready, buf_overflow, dec_err;
  ilas_cfg_t ilas_cfg;
  logic [31:0] out_data;
  logic out_is_data, out_valid;
  logic sync_n = 0;
  logic [0:0] tx_err = '0;
  int unsigned skew [1] = '{3};
  int unsigned rot  [1] = '{2};
  int unsigned sent;

  jesd_tx_model #(.L(1), .F(F), .K(K), .SCR(1), .LINK(0)) u_tx (
    .clk, .sysref, .sync_n, .skew, .rot, .dec_err(tx_err), .bad_fchk(1'b0),
    .gtx, .data_words_sent(sent)
  );

  data_path #(.L(1), .F(F), .K(K), .DESCRAMBLING(1), .BUFFER_DEPTH(32)) dut (
    .clk, .rst, .gtx(gtx[0]), .lane_clear, .align_hold, .ilas_enable, .buf_release,
    .cgs_done, .ilas_done, .ilas_err, .ilas_cfg, .aligned, .buf_ready, .buf_overflow,
    .dec_err, .out_data, .out_is_data, .out_valid
  );

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_ilas_out = 0, n_data_out = 0;
  initial begin
    int t_rel, t_out;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    lane_clear = 0;
    repeat (10) @(negedge clk);
    checks++; if (!cgs_done) begin failures++; $display("no CGS"); end
    align_hold = 0; ilas_enable = 1; sync_n = 1;
    while (!buf_ready) @(negedge clk);
    repeat (10) @(negedge clk);
    buf_release = 1;
    t_rel = 0;
    while (!out_valid) begin @(negedge clk); t_rel++; end
    checks++; if (t_rel != 2) begin failures++; $display("output %0d cycles after release", t_rel); end
    for (int w = 0; w < 4 * MFW + 100; w++) begin
      if (w < 4 * MFW) begin
        checks++;
        if (out_is_data) failures++;
        if (w == 0) begin
          checks++;
          if (out_data[7:0] != K28_0) begin failures++; $display("first word %h", out_data); end
        end
        n_ilas_out++;
      end else begin
        checks++;
        if (!out_is_data || out_data !== tx_data_word(0, 0, w - 4 * MFW)) begin
          failures++;
          if (failures < 5) $display("data %0d: %h expected %h", w - 4 * MFW, out_data,
                                     tx_data_word(0, 0, w - 4 * MFW));
        end
        n_data_out++;
      end
      @(negedge clk);
    end
    checks++;
    if (!ilas_done || ilas_err || ilas_cfg.f_m1 != 8'(F - 1) || ilas_cfg.k_m1 != 5'(K - 1)
        || !aligned || buf_overflow) begin
      failures++; $display("status wrong");
    end
    // Decoding error: model registers it, the input register once more.
    tx_err = 1'b1; @(negedge clk); tx_err = 1'b0;
    checks++; if (dec_err) failures++;
    @(negedge clk);
    checks++; if (!dec_err) begin failures++; $display("dec_err missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
