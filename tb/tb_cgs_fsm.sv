// tb_cgs_fsm: lane CGS with K_MIN_OCTETS = 8 (two all-/K28.5/ words).
// Checks: one /K/ word is not enough; a non-/K/ word restarts the count;
// two consecutive /K/ words give cgs_done one cycle later; cgs_done then
// holds through data and is cleared only by restart; a word with /K28.5/
// in only some octets does not count.
`timescale 1ns/1ps
module tb_cgs_fsm;
  import jesd_pkg::*;
  logic clk = 0, rst = 1, restart = 0, cgs_done, k_word;
  lane_word_t in;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  cgs_fsm #(.K_MIN_OCTETS(8)) dut (.clk, .rst, .restart, .in, .cgs_done, .k_word);

  localparam lane_word_t KW = '{data: {4{K28_5}}, charisk: 4'hF};
  localparam lane_word_t DW = '{data: 32'h1234_5678, charisk: 4'h0};
  localparam lane_word_t PW = '{data: {K28_5, K28_5, K28_5, 8'h11}, charisk: 4'hE};

  task automatic send(input lane_word_t w, input logic exp_done);
    in = w;
    @(negedge clk);
    checks++;
    if (cgs_done !== exp_done) begin
      failures++;
      $display("word %h: cgs_done %b expected %b", w.data, cgs_done, exp_done);
    end
  endtask

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = DW;
    repeat (2) @(negedge clk);
    rst = 0;
    send(DW, 0);
    send(KW, 0);
    send(DW, 0);          // broken run
    send(KW, 0);
    send(PW, 0);          // partial /K/ word breaks the run
    send(KW, 0);
    send(KW, 1);          // second consecutive /K/ word
    send(DW, 1);
    send(PW, 1);
    restart = 1; send(KW, 0); restart = 0;
    send(KW, 0);
    send(KW, 1);
    checks++; if (!k_word) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
