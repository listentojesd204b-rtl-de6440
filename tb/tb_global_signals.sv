// tb_global_signals: reset synchroniser and SYSREF edge detector.
// rst must be high while reset_n is low and fall exactly 2 clock edges after
// reset_n rises; every SYSREF rising edge must give exactly one sysref_edge
// pulse, visible right after the second clock edge that samples SYSREF
// high, and a SYSREF
// held high must give no further pulse.
`timescale 1ns/1ps
module tb_global_signals;
  logic clk = 0, reset_n = 0, sysref = 0, rst, sysref_edge;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  global_signals dut (.clk, .reset_n, .sysref, .rst, .sysref_edge);

  int pulses = 0;
  always @(posedge clk) if (sysref_edge) pulses++;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #0.2 checks++; if (!rst) failures++;
    reset_n = 1;                       // released between edges
    @(posedge clk); #0.2 checks++; if (!rst) failures++;
    @(posedge clk); #0.2 checks++; if (rst) begin failures++; $display("rst late"); end
    // async assertion
    #0.3 reset_n = 0; #0.1 checks++; if (!rst) failures++;
    #0.3 reset_n = 1;
    repeat (3) @(posedge clk);
    #0.2 checks++; if (rst) failures++;
    // SYSREF pulses of different lengths
    for (int p = 0; p < 4; p++) begin
      int seen;
      @(negedge clk) sysref = 1;
      seen = -1;
      for (int c = 1; c <= 8; c++) begin
        @(posedge clk); #0.2;
        if (sysref_edge && seen < 0) seen = c;
        if (c == 1 + p) sysref = 0;
      end
      checks++;
      if (seen != 2) begin failures++; $display("pulse %0d at edge %0d", p, seen); end
      repeat (4) @(posedge clk);
    end
    checks++;
    if (pulses != 4) begin failures++; $display("%0d pulses", pulses); end
    // SYSREF held high: one pulse only
    @(negedge clk) sysref = 1;
    repeat (20) @(posedge clk);
    checks++; if (pulses != 5) begin failures++; $display("held high gives %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
