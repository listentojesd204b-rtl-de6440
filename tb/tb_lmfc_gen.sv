// tb_lmfc_gen: LMFC counter with F = 8, K = 4 (8 words per multiframe).
// Before SYSREF lmfc_locked is low. After a sysref_edge pulse the next cycle
// is a boundary (lmfc_tick) and ticks follow exactly every 8 cycles; a SYSREF
// edge in the middle of a multiframe restarts the count.
`timescale 1ns/1ps
module tb_lmfc_gen;
  localparam int unsigned F = 8, K = 4, P = F * K / 4;
  logic clk = 0, rst = 1, sysref_edge = 0, lmfc_tick, lmfc_locked;
  logic [$clog2(P+1)-1:0] lmfc_cnt;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  lmfc_gen #(.F(F), .K(K)) dut (.clk, .rst, .sysref_edge, .lmfc_tick, .lmfc_locked, .lmfc_cnt);

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse();
    @(negedge clk) sysref_edge = 1;
    @(negedge clk) sysref_edge = 0;
  endtask

  task automatic expect_ticks(input int cycles);
    // The cycle right after the pulse is phase 0.
    for (int c = 0; c < cycles; c++) begin
      checks++;
      if (lmfc_tick !== ((c % P) == 0) || !lmfc_locked) begin
        failures++;
        if (failures < 5) $display("cycle %0d tick %b", c, lmfc_tick);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    checks++; if (lmfc_locked) failures++;
    pulse();
    expect_ticks(37);
    pulse();                 // mid-multiframe SYSREF
    expect_ticks(20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
