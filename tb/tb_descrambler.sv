// tb_descrambler: checks the parallel descrambler against a bit-serial
// scrambler model (1 + x^14 + x^15, octet 0 first, MSB first). Random
// words are scrambled serially and fed to the descrambler; after the
// one-cycle latency the output must equal the original words and `raw` the
// scrambled words. A second instance with ENABLE = 0 must pass data through.
`timescale 1ns/1ps
module tb_descrambler;
  import jesd_pkg::*;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  lane_word_t  in;
  lane_word_t  raw, raw0;
  logic [31:0] data, data0;
  descrambler #(.ENABLE(1)) dut  (.clk, .rst, .in, .raw, .data);
  descrambler #(.ENABLE(0)) dut0 (.clk, .rst, .in, .raw(raw0), .data(data0));

  logic [14:0] h = '0;
  function automatic logic [31:0] scr(inout logic [14:0] hh, input logic [31:0] d);
    logic [31:0] s;
    for (int o = 0; o < 4; o++)
      for (int b = 7; b >= 0; b--) begin
        s[8*o + b] = d[8*o + b] ^ hh[13] ^ hh[14];
        hh = {hh[13:0], s[8*o + b]};
      end
    return s;
  endfunction

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] plain, sent;
    in = '0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    // The receiver history starts at zero, like the model's.
    for (int i = 0; i < 100; i++) begin
      plain = $urandom();
      sent  = scr(h, plain);
      in    = '{data: sent, charisk: 4'h0};
      @(posedge clk); #0.1;
      checks++;
      if (data !== plain || raw.data !== sent) begin
        failures++;
        if (failures < 5) $display("word %0d: got %08h expected %08h", i, data, plain);
      end
      checks++;
      if (data0 !== sent) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
