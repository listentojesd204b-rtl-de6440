// tb_control_fsm: link controller with L = 2, RESET_CYCLES = 5,
// CGS_STABLE_CYCLES = 6, ERR_THRESHOLD = 3, ILAS_TIMEOUT = 200, LMFC period 8.
// Walks ST_RESET (rx_reset_gt for 5 cycles) -> ST_WAIT_FOR_PHY -> ST_CGS
// (sync_n low, char align on) and checks: a lane dropping CGS restarts the
// stability count; SYNC~ is released only at an LMFC tick after 6 stable
// cycles; no ST_ILAS without a locked LMFC; an ILAS error, an overflow and
// the ILAS timeout each return to ST_CGS; all lanes' ILAS plus release
// give ST_SYNCED; 2 error words are tolerated, the 3rd sends ST_RESET.
`timescale 1ns/1ps
module tb_control_fsm;
  import jesd_pkg::*;
  localparam int unsigned L = 2;
  logic clk = 0, rst = 1, rx_reset_done = 0, lmfc_locked = 0;
  logic [L-1:0] cgs_done = '0, ilas_done = '0, ilas_err = '0, dec_err = '0;
  logic released = 0, overflow = 0;
  link_state_t state;
  logic sync_n, en_ca, rst_gt, lane_clear, cgs_stable, ilas_enable, synced;
  logic lmfc_tick;
  int cyc = 0;
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign lmfc_tick = (cyc % 8) == 0;
  int checks = 0, failures = 0;

  control_fsm #(.L(L), .RESET_CYCLES(5), .CGS_STABLE_CYCLES(6), .ERR_THRESHOLD(3),
                .ILAS_TIMEOUT(200)) dut (
    .clk, .rst, .rx_reset_done, .lmfc_tick, .lmfc_locked, .lane_cgs_done(cgs_done),
    .lane_ilas_done(ilas_done), .lane_ilas_err(ilas_err), .lane_dec_err(dec_err),
    .buffers_released(released), .buffer_overflow(overflow), .state, .sync_n,
    .gtx_en_char_align(en_ca), .rx_reset_gt(rst_gt), .lane_clear, .cgs_stable,
    .ilas_enable, .synced
  );

  task automatic expect_state(input link_state_t s, input string what);
    checks++;
    if (state !== s) begin
      failures++;
      $display("%s: state %s expected %s", what, state.name(), s.name());
    end
  endtask

  task automatic cgs_to_ilas(output int stable_seen);
    // Bring CGS up and wait for ILAS; returns the cycles from CGS up to ILAS.
    cgs_done = '1;
    stable_seen = 0;
    while (state != ST_ILAS && stable_seen < 100) begin
      @(negedge clk);
      stable_seen++;
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, t_ilas;
    repeat (2) @(negedge clk);
    rst = 0;
    n = 0;
    while (rst_gt) begin @(negedge clk); n++; end
    checks++; if (n != 5) begin failures++; $display("GT reset %0d cycles", n); end
    expect_state(ST_WAIT_FOR_PHY, "after reset");
    checks++; if (sync_n || !en_ca || !lane_clear) failures++;
    repeat (4) @(negedge clk);
    expect_state(ST_WAIT_FOR_PHY, "waiting for PHY");
    rx_reset_done = 1;
    @(negedge clk);
    expect_state(ST_CGS, "PHY ready");
    // Unstable CGS: lane 1 drops every 4 cycles.
    for (int i = 0; i < 40; i++) begin
      cgs_done = (i % 4 == 3) ? 2'b01 : 2'b11;
      lmfc_locked = 1;
      @(negedge clk);
      checks++; if (state != ST_CGS || !(!sync_n)) begin failures++; $display("left CGS while unstable"); end
    end
    // Stable CGS but no LMFC lock.
    lmfc_locked = 0; cgs_done = '1;
    repeat (30) @(negedge clk);
    expect_state(ST_CGS, "no LMFC lock");
    lmfc_locked = 1;
    cgs_to_ilas(t_ilas);
    expect_state(ST_ILAS, "stable CGS");
    checks++; if (!sync_n || !ilas_enable) failures++;
    // ILAS error -> CGS
    @(negedge clk); ilas_err = 2'b10; @(negedge clk); ilas_err = '0;
    expect_state(ST_CGS, "ILAS error");
    checks++; if (sync_n) failures++;
    cgs_done = '0; @(negedge clk);
    cgs_to_ilas(t_ilas);
    // The stability count must have restarted: at least 6 cycles.
    checks++; if (t_ilas < 6) begin failures++; $display("ILAS after %0d cycles", t_ilas); end
    // Overflow -> CGS
    overflow = 1; @(negedge clk); overflow = 0;
    expect_state(ST_CGS, "overflow");
    cgs_to_ilas(t_ilas);
    // Timeout -> CGS
    n = 0;
    while (state == ST_ILAS && n < 300) begin @(negedge clk); n++; end
    checks++; if (n < 199 || n > 202) begin failures++; $display("timeout after %0d", n); end
    expect_state(ST_CGS, "timeout");
    cgs_to_ilas(t_ilas);
    // Normal completion
    ilas_done = 2'b01; released = 1; repeat (3) @(negedge clk);
    expect_state(ST_ILAS, "one lane done");
    ilas_done = 2'b11; @(negedge clk);
    expect_state(ST_SYNCED, "all lanes done");
    checks++; if (!synced || !sync_n || en_ca) failures++;
    // Errors below and at the threshold
    for (int i = 0; i < 2; i++) begin dec_err = 2'b01; @(negedge clk); dec_err = '0; @(negedge clk); end
    expect_state(ST_SYNCED, "two errors");
    dec_err = 2'b10; @(negedge clk); dec_err = '0; @(negedge clk);
    expect_state(ST_RESET, "third error");
    checks++; if (!rst_gt) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
