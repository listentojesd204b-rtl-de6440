// tb_elastic_buffer: DEPTH = 16. Words are written every cycle from
// wr_start on; release comes N cycles later. One cycle after release the
// output must be the word written at wr_start, followed by the rest in
// order with no gap (N = 1, 7, 15). With release held back for 17 words the
// buffer must report overflow; restart must clear it.
`timescale 1ns/1ps
module tb_elastic_buffer;
  localparam int unsigned DEPTH = 16, WIDTH = 33;
  logic clk = 0, rst = 1, restart = 0, wr_start = 0, release_i = 0;
  logic ready, rd_valid, overflow;
  logic [WIDTH-1:0] wr_data, rd_data;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  elastic_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (
    .clk, .rst, .restart, .wr_start, .wr_data, .release_i, .ready, .rd_data,
    .rd_valid, .overflow
  );

  function automatic logic [WIDTH-1:0] word(input int i);
    return {1'(i % 3 == 0), 32'(i * 32'h0101_0305 + 7)};
  endfunction

  task automatic run(input int wait_words, input bit expect_ovf);
    int w, r;
    restart = 1; @(negedge clk); restart = 0;
    w = 0; r = 0;
    wr_data = word(100);          // ignored: before wr_start
    @(negedge clk);
    checks++; if (ready) failures++;
    for (int c = 0; c < wait_words + 40; c++) begin
      wr_start = (c == 0);
      wr_data  = word(w);
      release_i = (c >= wait_words) && !expect_ovf;
      @(negedge clk);
      w++;
      if (rd_valid) begin
        checks++;
        if (rd_data !== word(r)) begin
          failures++;
          if (failures < 5) $display("wait %0d: read %0d got %h expected %h", wait_words, r, rd_data, word(r));
        end
        r++;
      end
    end
    wr_start = 0;
    checks++;
    if (overflow !== expect_ovf || (!expect_ovf && r < 35)) begin
      failures++; $display("wait %0d: overflow %b, %0d words read", wait_words, overflow, r);
    end
    release_i = 0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_data = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    run(1, 0);
    run(7, 0);
    run(15, 0);
    run(20, 1);
    run(4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
