// tb_frame_marker: frame-start flags for F = 4, 6 and 32. After `start`,
// octet i of valid word n must be flagged exactly when (4n + i) mod F = 0;
// words without `valid` must not advance the count and carry no flags.
`timescale 1ns/1ps
module tb_frame_marker;
  logic clk = 0, rst = 1, start = 0, valid = 0;
  logic [3:0] frame4, frame6, frame32;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  frame_marker #(.F(4))  d4  (.clk, .rst, .start, .valid, .frame(frame4));
  frame_marker #(.F(6))  d6  (.clk, .rst, .start, .valid, .frame(frame6));
  frame_marker #(.F(32)) d32 (.clk, .rst, .start, .valid, .frame(frame32));

  function automatic logic [3:0] expf(input int n, input int f, input logic v);
    logic [3:0] e;
    for (int i = 0; i < 4; i++) e[i] = v && (((4 * n + i) % f) == 0);
    return e;
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    valid = 0;
    repeat (3) @(negedge clk);
    for (int run = 0; run < 2; run++) begin
      int n;
      n = 0;
      for (int c = 0; c < 100; c++) begin
        start = (c == 0);
        valid = (c == 0) || ($urandom_range(0, 4) != 0);
        #0.1;
        checks += 3;
        if (frame4  !== expf(n, 4, valid))  failures++;
        if (frame6  !== expf(n, 6, valid))  begin failures++; if (failures < 5) $display("F=6 word %0d: %b", n, frame6); end
        if (frame32 !== expf(n, 32, valid)) failures++;
        if (valid) n++;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
