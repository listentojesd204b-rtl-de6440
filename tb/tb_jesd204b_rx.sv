// tb_jesd204b_rx: end-to-end test of the receiver.
//
// Two receivers are simulated. dut (2 links x 4 lanes, F = 16, K = 16,
// scrambling on) is driven by one transmitter model per link; the lanes
// have different delays and octet shifts. dut_plain (1 link x 2 lanes,
// F = 16, K = 16, scrambling off) is the two-lane link of one 16-channel
// ADC and checks the non-scrambled mode. The test walks link 0 of dut through:
//   1. start-up: reset, GT reset, CGS, ILAS, synchronised data
//   2. decoding errors above the threshold -> ST_RESET and re-synchronisation
//   3. a corrupted ILAS checksum -> ILAS error, back to ST_CGS
//   4. new lane skews -> re-synchronisation with the same output timing
//      relative to the LMFC (deterministic latency)
//   5. a skew larger than the elastic buffer -> overflow, back to ST_CGS
// while link 1 must stay synchronised throughout. All output words are
// compared with the transmitted data; each mechanism must occur at least
// once.
`timescale 1ns/1ps
module tb_jesd204b_rx;
  import jesd_pkg::*;
  import jesd_tb_pkg::*;

  localparam int unsigned LINKS = 2, L = 4, F = 16, K = 16;
  localparam int unsigned MFW = F * K / 4;
  localparam int unsigned PL = 2, PF = 16, PK = 16;

  logic clk = 0, reset_n = 1, sysref = 0;
  initial #0.5 reset_n = 0;       // asynchronous reset before the first edge
  always #1.5625 clk = ~clk;       // 320 MHz

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // ------------------------------------------------------------ main DUT
  gt_word_t    [LINKS-1:0][L-1:0] gtx;
  logic        [LINKS-1:0]        rx_reset_done, rx_valid, sync, en_ca, rst_gt, ovf;
  logic        [LINKS-1:0][32*L-1:0] rx_data;
  logic        [LINKS-1:0][3:0]   rx_frame;
  link_state_t [LINKS-1:0]        st;
  ilas_cfg_t   [LINKS-1:0][L-1:0] cfg;
  logic        [LINKS-1:0][L-1:0] ilas_err;
  logic                           lmfc_locked;

  jesd204b_rx #(.LINKS(LINKS), .L(L), .F(F), .K(K), .DESCRAMBLING(1)) dut (
    .clk, .reset_n, .sysref, .gtx, .rx_reset_done, .rx_data, .rx_valid,
    .rx_frame, .sync, .gtx_en_char_align(en_ca), .rx_reset_gt(rst_gt),
    .link_state(st), .ilas_cfg(cfg), .ilas_err, .buffer_overflow(ovf), .lmfc_locked
  );

  int unsigned skew [LINKS][L];
  int unsigned rot  [LINKS][L];
  logic [LINKS-1:0][L-1:0] dec_err;
  logic [LINKS-1:0]        bad_fchk;
  int unsigned sent [LINKS];

  for (genvar k = 0; k < LINKS; k++) begin : g_tx
    jesd_tx_model #(.L(L), .F(F), .K(K), .SCR(1), .LINK(k)) u_tx (
      .clk, .sysref, .sync_n(sync[k]), .skew(skew[k]), .rot(rot[k]),
      .dec_err(dec_err[k]), .bad_fchk(bad_fchk[k]), .gtx(gtx[k]),
      .data_words_sent(sent[k])
    );
  end

  // Transceiver reset model: done 10 cycles after rx_reset_gt falls.
  int gt_cnt [LINKS];
  always @(posedge clk) for (int k = 0; k < LINKS; k++) begin
    if (rst_gt[k]) begin gt_cnt[k] <= 0; rx_reset_done[k] <= 1'b0; end
    else if (gt_cnt[k] < 10) gt_cnt[k] <= gt_cnt[k] + 1;
    else rx_reset_done[k] <= 1'b1;
  end

  int c_chk [LINKS], c_fail [LINKS], c_words [LINKS], c_frames [LINKS];
  logic [LINKS-1:0] first_valid;
  for (genvar k = 0; k < LINKS; k++) begin : g_chk
    tb_link_check #(.L(L), .F(F), .LINK(k)) u_chk (
      .clk, .rx_data(rx_data[k]), .rx_valid(rx_valid[k]), .rx_frame(rx_frame[k]),
      .state(st[k]), .checks(c_chk[k]), .failures(c_fail[k]), .words(c_words[k]),
      .frame_flags(c_frames[k]), .first_valid(first_valid[k])
    );
  end

  // ------------------------------------------------ non-scrambled DUT
  gt_word_t    [0:0][PL-1:0] p_gtx;
  logic        [0:0]         p_done, p_valid, p_sync, p_ca, p_rstgt, p_ovf;
  logic        [0:0][32*PL-1:0] p_data;
  logic        [0:0][3:0]    p_frame;
  link_state_t [0:0]         p_st;
  ilas_cfg_t   [0:0][PL-1:0] p_cfg;
  logic        [0:0][PL-1:0] p_ierr;
  logic                      p_locked;
  int unsigned p_skew [PL] = '{2, 0};
  int unsigned p_rot  [PL] = '{3, 1};
  int unsigned p_sent;
  int p_chk, p_fail, p_words, p_frames;
  logic p_first;
  int p_gt_cnt;

  jesd204b_rx #(.LINKS(1), .L(PL), .F(PF), .K(PK), .DESCRAMBLING(0)) dut_plain (
    .clk, .reset_n, .sysref, .gtx(p_gtx), .rx_reset_done(p_done), .rx_data(p_data),
    .rx_valid(p_valid), .rx_frame(p_frame), .sync(p_sync), .gtx_en_char_align(p_ca),
    .rx_reset_gt(p_rstgt), .link_state(p_st), .ilas_cfg(p_cfg), .ilas_err(p_ierr),
    .buffer_overflow(p_ovf), .lmfc_locked(p_locked)
  );
  jesd_tx_model #(.L(PL), .F(PF), .K(PK), .SCR(0), .LINK(0)) u_ptx (
    .clk, .sysref, .sync_n(p_sync[0]), .skew(p_skew), .rot(p_rot), .dec_err('0),
    .bad_fchk(1'b0), .gtx(p_gtx[0]), .data_words_sent(p_sent)
  );
  always @(posedge clk) begin
    if (p_rstgt[0]) begin p_gt_cnt <= 0; p_done[0] <= 1'b0; end
    else if (p_gt_cnt < 10) p_gt_cnt <= p_gt_cnt + 1;
    else p_done[0] <= 1'b1;
  end
  tb_link_check #(.L(PL), .F(PF), .LINK(0)) u_pchk (
    .clk, .rx_data(p_data[0]), .rx_valid(p_valid[0]), .rx_frame(p_frame[0]),
    .state(p_st[0]), .checks(p_chk), .failures(p_fail), .words(p_words),
    .frame_flags(p_frames), .first_valid(p_first)
  );

  // ------------------------------------------------ SYSREF and phases
  longint last_sysref = 0;
  always @(posedge clk) begin
    sysref <= ((cycle % (4 * MFW)) >= 20) && ((cycle % (4 * MFW)) < 22);
    if ((cycle % (4 * MFW)) == 20) last_sysref = cycle;
  end

  // Output timing relative to SYSREF, per link, at each first valid word.
  longint first_phase [LINKS];
  int     n_first [LINKS];
  int     n_phase_same = 0;
  initial for (int k = 0; k < LINKS; k++) begin first_phase[k] = -1; n_first[k] = 0; end
  always @(posedge clk) for (int k = 0; k < LINKS; k++) if (first_valid[k]) begin
    longint ph;
    ph = (cycle - last_sysref) % MFW;
    n_first[k]++;
    if (first_phase[k] < 0) first_phase[k] = ph;
    else begin
      checks++;
      if (ph != first_phase[k]) begin
        failures++;
        $display("link %0d: first valid word at LMFC phase %0d, n_prev %0d", k, ph, first_phase[k]);
      end else n_phase_same++;
    end
  end

  // ------------------------------------------------ mechanism counters
  int n_to_ilas = 0, n_synced = 0, n_err_reset = 0, n_ilas_fail = 0, n_overflow = 0;
  int n_link1_drop = 0, n_sync_lmfc = 0;
  link_state_t st_q [LINKS];
  initial for (int k = 0; k < LINKS; k++) st_q[k] = ST_RESET;
  always @(posedge clk) begin
    for (int k = 0; k < LINKS; k++) begin
      if (st_q[k] == ST_CGS && st[k] == ST_ILAS) begin
        n_to_ilas++;
        // SYNC~ released on an LMFC boundary: the boundary was last cycle.
        checks++;
        if (dut.u_lmfc.lmfc_cnt != 1 && !(MFW == 1)) failures++;
        else n_sync_lmfc++;
      end
      if (st_q[k] != ST_SYNCED && st[k] == ST_SYNCED) n_synced++;
      if (st_q[k] == ST_SYNCED && st[k] == ST_RESET) n_err_reset++;
      if (st_q[k] == ST_ILAS && st[k] == ST_CGS && (|ilas_err[k])) n_ilas_fail++;
      if (st_q[k] == ST_ILAS && st[k] == ST_CGS && ovf[k]) n_overflow++;
      if (k == 1 && st_q[k] == ST_SYNCED && st[k] != ST_SYNCED) n_link1_drop++;
      st_q[k] = st[k];
    end
  end

  task automatic wait_words(input int k, input int nwords, input int limit);
    int start;
    start = c_words[k];
    repeat (limit) begin
      @(posedge clk);
      if (st[k] == ST_SYNCED && c_words[k] - start >= nwords) return;
    end
    failures++;
    $display("link %0d: no %0d data words within %0d cycles (state %s)", k, nwords,
             limit, st[k].name());
  endtask

  task automatic wait_state(input int k, input link_state_t s, input int limit);
    repeat (limit) begin
      @(posedge clk);
      if (st[k] == s) return;
    end
    failures++;
    $display("link %0d: state %s not reached", k, s.name());
  endtask

  task automatic errors_on_link0();
    for (int i = 0; i < 6; i++) begin
      dec_err[0][2] = 1'b1; @(posedge clk); dec_err[0][2] = 1'b0;
      repeat (3) @(posedge clk);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    skew[0] = '{0, 1, 3, 5};  rot[0] = '{0, 1, 2, 3};
    skew[1] = '{4, 4, 0, 2};  rot[1] = '{2, 0, 3, 1};
    dec_err = '0;
    bad_fchk = '0;
    repeat (5) @(posedge clk);
    reset_n = 1;

    // 1. start-up
    wait_words(0, 300, 5000);
    wait_words(1, 300, 5000);
    wait_words(0, 100, 5000);     // plain DUT runs meanwhile
    checks++;
    if (cfg[0][2].lid != 5'd2 || cfg[0][2].f_m1 != 8'(F - 1) || cfg[0][2].k_m1 != 5'(K - 1)
        || cfg[1][0].bid != 4'd1 || cfg[0][1].did != 8'hA5) begin
      failures++; $display("ILAS configuration not captured");
    end

    // 2. decoding errors -> reset and re-synchronisation
    errors_on_link0();
    wait_state(0, ST_RESET, 100);
    wait_words(0, 200, 5000);

    // 3. corrupted ILAS -> back to CGS
    bad_fchk[0] = 1'b1;
    errors_on_link0();
    begin
      int n_prev;
      n_prev = n_ilas_fail;
      repeat (5000) begin @(posedge clk); if (n_ilas_fail > n_prev) break; end
    end
    bad_fchk[0] = 1'b0;
    wait_words(0, 200, 8000);

    // 4. new skews -> same output phase
    skew[0] = '{9, 0, 2, 7};  rot[0] = '{3, 3, 0, 1};
    errors_on_link0();
    wait_words(0, 200, 5000);

    // 5. skew beyond the buffer -> overflow
    skew[0] = '{0, 0, 0, 200};
    errors_on_link0();
    begin
      int n_prev;
      n_prev = n_overflow;
      repeat (8000) begin @(posedge clk); if (n_overflow > n_prev) break; end
    end
    skew[0] = '{1, 0, 0, 2};
    wait_words(0, 200, 10000);
    wait_words(1, 50, 1000);

    // ----------------------------------------------- summary
    for (int k = 0; k < LINKS; k++) begin
      checks += c_chk[k]; failures += c_fail[k];
    end
    checks += p_chk; failures += p_fail;
    $display("mechanisms: cgs->ilas=%0d synced=%0d errors->reset=%0d ilas_fail->cgs=%0d overflow->cgs=%0d same_phase=%0d sync_on_lmfc=%0d",
             n_to_ilas, n_synced, n_err_reset, n_ilas_fail, n_overflow, n_phase_same, n_sync_lmfc);
    $display("data words: link0=%0d link1=%0d plain=%0d frames0=%0d plain_frames=%0d link1_drops=%0d",
             c_words[0], c_words[1], p_words, c_frames[0], p_frames, n_link1_drop);
    checks++; if (n_to_ilas == 0)    begin failures++; $display("no CGS completion"); end
    checks++; if (n_synced == 0)     begin failures++; $display("never synchronised"); end
    checks++; if (n_err_reset == 0)  begin failures++; $display("no error-triggered reset"); end
    checks++; if (n_ilas_fail == 0)  begin failures++; $display("no ILAS failure"); end
    checks++; if (n_overflow == 0)   begin failures++; $display("no buffer overflow"); end
    checks++; if (n_phase_same == 0) begin failures++; $display("latency never compared"); end
    checks++; if (c_frames[0] == 0 || p_frames == 0) begin failures++; $display("no frame flags"); end
    checks++; if (p_words < 100)     begin failures++; $display("plain link carried too little data"); end
    checks++; if (n_link1_drop != 0) begin failures++; $display("link 1 lost sync"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
