// tb_buffer_release: three lanes. release_o must rise only in an LMFC tick
// cycle in which enable is high and all lanes are ready, then stay high;
// release_pulse must be high in that cycle only; restart clears it.
// The expected value is computed cycle by cycle from random inputs.
`timescale 1ns/1ps
module tb_buffer_release;
  localparam int unsigned L = 3;
  logic clk = 0, rst = 1, restart = 0, enable = 0, lmfc_tick = 0;
  logic [L-1:0] lane_ready = '0;
  logic release_o, release_pulse;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, releases = 0;
  buffer_release #(.L(L)) dut (.clk, .rst, .restart, .enable, .lmfc_tick, .lane_ready,
                               .release_o, .release_pulse);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic model;
    repeat (2) @(negedge clk);
    rst = 0;
    model = 0;
    for (int c = 0; c < 3000; c++) begin
      logic exp_pulse;
      restart    = ($urandom_range(0, 99) == 0);
      enable     = ($urandom_range(0, 9) != 0);
      lmfc_tick  = (c % 8) == 0;
      lane_ready = 3'($urandom_range(0, 7)) | (($urandom_range(0, 3) == 0) ? 3'b111 : 3'b000);
      #0.1;
      exp_pulse = !model && enable && lmfc_tick && (&lane_ready);
      checks++;
      if (release_pulse !== exp_pulse || release_o !== (model || exp_pulse)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: pulse %b/%b release %b", c, release_pulse, exp_pulse, release_o);
      end
      if (exp_pulse) releases++;
      @(negedge clk);
      model = restart ? 1'b0 : (model || exp_pulse);
    end
    checks++; if (releases < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
