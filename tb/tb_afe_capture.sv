// tb_afe_capture: the reference hardware test replayed in simulation. A
// 16-channel, 16-bit, 80 MS/s ADC streams over one two-lane link (L = 2,
// F = 16, K = 16) into the receiver at 320 MHz. Four receiver/transmitter
// pairs run side by side: a ramp and a 5 MHz sine, each with scrambling on
// and off. Every pair captures 8000 samples per channel (100 us of signal,
// the length of the phantom capture) after link start-up.
//
// The testbench turns the receiver's lane words back into samples with its
// own copy of the transport mapping (lane 0 carries converters 0..7, lane 1
// converters 8..15, MSB octet first) and checks them: the ramp exactly
// (channel number in the top nibble, frame count below), the sine against
// 9830 * sin(2*pi*n/16 + pi*c/8) within 1 LSB. It also checks the rate: once
// rx_valid rises it must stay high on every clock (one frame of 16 samples
// per 4 clocks = 80 MS/s per channel), and rx_frame must flag octet 0 of
// every fourth word. Per pair it counts frames checked and valid gaps; a
// pair that never reaches 8000 frames fails.
`timescale 1ns/1ps
module tb_afe_capture;
  import jesd_pkg::*;
  import jesd_tb_pkg::*;

  localparam int unsigned L = 2, F = 16, K = 16, MFW = F * K / 4;
  localparam int unsigned NFRAMES = 8000;
  localparam int unsigned NPAIR = 4;

  logic clk = 0, reset_n = 1, sysref = 0;
  initial #0.5 reset_n = 0;       // asynchronous reset before the first edge
  always #1.5625 clk = ~clk;      // 320 MHz
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  always @(posedge clk)
    sysref <= ((cycle % (4 * MFW)) >= 20) && ((cycle % (4 * MFW)) < 22);

  int unsigned frames_ok [NPAIR];
  int unsigned pair_chk  [NPAIR];
  int unsigned pair_fail [NPAIR];
  int unsigned gaps      [NPAIR];
  logic        done      [NPAIR];

  for (genvar g = 0; g < NPAIR; g++) begin : g_pair
    localparam int unsigned MODE = (g % 2) + 1;   // 1 ramp, 2 sine
    localparam bit          SCR  = (g / 2) == 0;

    gt_word_t    [0:0][L-1:0] gtx;
    logic        [0:0]        rx_reset_done, rx_valid, sync, en_ca, rst_gt, ovf;
    logic        [0:0][32*L-1:0] rx_data;
    logic        [0:0][3:0]   rx_frame;
    link_state_t [0:0]        st;
    ilas_cfg_t   [0:0][L-1:0] cfg;
    logic        [0:0][L-1:0] ilas_err;
    logic                     lmfc_locked;

    jesd204b_rx #(.LINKS(1), .L(L), .F(F), .K(K), .DESCRAMBLING(SCR)) dut (
      .clk, .reset_n, .sysref, .gtx, .rx_reset_done, .rx_data, .rx_valid,
      .rx_frame, .sync, .gtx_en_char_align(en_ca), .rx_reset_gt(rst_gt),
      .link_state(st), .ilas_cfg(cfg), .ilas_err, .buffer_overflow(ovf), .lmfc_locked
    );

    int unsigned skew [L] = '{2 + g, 0};
    int unsigned rot  [L] = '{g % 4, (g + 1) % 4};
    int unsigned sent;
    jesd_tx_model #(.L(L), .F(F), .K(K), .SCR(SCR), .LINK(0), .PAYLOAD(MODE)) u_tx (
      .clk, .sysref, .sync_n(sync[0]), .skew, .rot, .dec_err('0), .bad_fchk(1'b0),
      .gtx(gtx[0]), .data_words_sent(sent)
    );

    int gt_cnt;
    always @(posedge clk) begin
      if (rst_gt[0]) begin gt_cnt <= 0; rx_reset_done[0] <= 1'b0; end
      else if (gt_cnt < 10) gt_cnt <= gt_cnt + 1;
      else rx_reset_done[0] <= 1'b1;
    end

    // Deframing and sample checks.
    logic        started = 1'b0;
    int unsigned wi = 0, fr = 0;
    logic [15:0] smp [16];

    initial begin
      frames_ok[g] = 0; pair_chk[g] = 0; pair_fail[g] = 0; gaps[g] = 0; done[g] = 1'b0;
    end

    always @(posedge clk) begin
      if (!done[g]) begin
        if (started && !rx_valid[0]) gaps[g]++;
        if (rx_valid[0]) begin
          started = 1'b1;
          pair_chk[g]++;
          if (rx_frame[0] != ((wi == 0) ? 4'b0001 : 4'b0000)) begin
            pair_fail[g]++;
            $display("pair %0d frame %0d word %0d: rx_frame %b", g, fr, wi, rx_frame[0]);
          end
          for (int l = 0; l < int'(L); l++)
            for (int j = 0; j < 4; j++) begin
              int unsigned o, c;
              o = 4 * wi + 32'(j);
              c = 8 * 32'(l) + o / 2;
              if (o % 2 == 0) smp[c][15:8] = rx_data[0][32*l + 8*j +: 8];
              else            smp[c][7:0]  = rx_data[0][32*l + 8*j +: 8];
            end
          if (wi == 3) begin
            logic bad;
            bad = 1'b0;
            for (int c = 0; c < 16; c++) begin
              if (MODE == 1) begin
                if (smp[c] != 16'(c * 4096 + int'(fr))) bad = 1'b1;
              end else begin
                real e, got;
                e   = 9830.0 * $sin(2.0 * 3.14159265358979 * real'(fr % 16) / 16.0
                                    + 3.14159265358979 * real'(c) / 8.0);
                got = real'($signed(smp[c]));
                if (got - e > 1.0 || e - got > 1.0) bad = 1'b1;
              end
            end
            pair_chk[g]++;
            if (bad) begin
              pair_fail[g]++;
              if (pair_fail[g] < 5)
                $display("pair %0d frame %0d: ch0 %h ch8 %h ch15 %h", g, fr, smp[0], smp[8], smp[15]);
            end else frames_ok[g]++;
            fr++;
            if (fr == NFRAMES) done[g] = 1'b1;
          end
          wi = (wi + 1) % 4;
        end
      end
    end

    // ILAS configuration as captured by the receiver.
    initial begin
      wait (done[g]);
      for (int l = 0; l < int'(L); l++) begin
        pair_chk[g]++;
        if (cfg[0][l].l_m1 != 5'(L - 1) || cfg[0][l].f_m1 != 8'(F - 1)
            || cfg[0][l].m_m1 != 8'd15 || cfg[0][l].np_m1 != 5'd15
            || cfg[0][l].scr != SCR || ilas_err[0][l] || ovf[0])
          pair_fail[g]++;
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic all_done;
    repeat (5) @(posedge clk);
    reset_n = 1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int g = 0; g < int'(NPAIR); g++) all_done &= done[g];
    end while (!all_done);
    repeat (2) @(posedge clk);
    for (int g = 0; g < int'(NPAIR); g++) begin
      $display("pair %0d (%s, scrambling %s): frames ok %0d of %0d, valid gaps %0d",
               g, (g % 2 == 0) ? "ramp" : "sine", (g / 2 == 0) ? "on" : "off",
               frames_ok[g], NFRAMES, gaps[g]);
      checks += pair_chk[g]; failures += pair_fail[g];
      checks += 2;
      if (frames_ok[g] != NFRAMES) failures++;
      if (gaps[g] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
