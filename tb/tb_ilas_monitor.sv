// tb_ilas_monitor: ILAS check with L = 2, F = 8, K = 4 (8 words per
// multiframe, 32 ILAS words). A correct ILAS must end with ilas_done, no
// error, in_ilas high for exactly the 32 ILAS words and is_data high after
// them, and the configuration fields captured. Then, one fault per run, a
// missing /A/, a missing /Q/, a wrong F and a wrong checksum must each set
// ilas_err and leave ilas_done low.
`timescale 1ns/1ps
module tb_ilas_monitor;
  import jesd_pkg::*;
  localparam int unsigned L = 2, F = 8, K = 4, MFW = F * K / 4;
  logic clk = 0, rst = 1, restart = 0, enable = 0;
  logic ilas_start, in_ilas, is_data, ilas_done, ilas_err;
  ilas_cfg_t cfg;
  lane_word_t in;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  ilas_monitor #(.L(L), .F(F), .K(K), .SCR(1)) dut (
    .clk, .rst, .restart, .enable, .in, .ilas_start, .in_ilas, .is_data,
    .ilas_done, .ilas_err, .cfg
  );

  // Configuration octets; checksum = sum of fields.
  function automatic logic [13:0][7:0] cfg_oct(input int fault);
    logic [13:0][7:0] c;
    int s;
    c = '0;
    c[0] = 8'h3C; c[1] = 8'h27; c[2] = 8'h01;
    c[3] = {1'b1, 2'b0, 5'(L - 1)};
    c[4] = (fault == 3) ? 8'(F) : 8'(F - 1);
    c[5] = 8'(K - 1); c[6] = 8'd7; c[7] = 8'h4F; c[8] = 8'h2F; c[9] = 8'h20;
    s = c[0] + c[1][7:4] + c[1][3:0] + c[2][6] + c[2][5] + c[2][4:0] + c[3][7]
      + c[3][4:0] + c[4] + c[5][4:0] + c[6] + c[7][7:6] + c[7][4:0] + c[8][7:5]
      + c[8][4:0] + c[9][7:5] + c[9][4:0] + c[10][7] + c[10][4:0] + c[11] + c[12];
    c[13] = 8'(s) ^ ((fault == 4) ? 8'h80 : 8'h00);
    return c;
  endfunction

  // fault: 0 none, 1 no /A/ in multiframe 2, 2 no /Q/, 3 wrong F, 4 bad FCHK
  task automatic run(input int fault);
    logic [13:0][7:0] c;
    int n_ilas;
    c = cfg_oct(fault);
    restart = 1; @(negedge clk); restart = 0;
    enable = 1;
    in = '{data: {4{K28_5}}, charisk: 4'hF};
    repeat (3) @(negedge clk);
    n_ilas = 0;
    for (int w = 0; w < 4 * MFW + 6; w++) begin
      int m, o;
      m = w / MFW;
      for (int b = 0; b < 4; b++) begin
        o = 4 * (w % MFW) + b;
        in.data[8*b +: 8] = 8'(w * 5 + b);
        in.charisk[b] = 1'b0;
        if (w < 4 * MFW) begin
          if (o == 0) begin in.data[8*b +: 8] = K28_0; in.charisk[b] = 1; end
          else if (o == F * K - 1 && !(fault == 1 && m == 2)) begin
            in.data[8*b +: 8] = K28_3; in.charisk[b] = 1; end
          else if (m == 1 && o == 1 && fault != 2) begin
            in.data[8*b +: 8] = K28_4; in.charisk[b] = 1; end
          else if (m == 1 && o >= 2 && o <= 15) in.data[8*b +: 8] = c[o-2];
        end
      end
      #0.1;
      if (in_ilas) n_ilas++;
      checks++;
      if (is_data !== (w >= 4 * MFW)) begin failures++; $display("is_data wrong at %0d", w); end
      @(negedge clk);
    end
    checks++;
    if (n_ilas != 4 * MFW) begin failures++; $display("in_ilas for %0d words", n_ilas); end
    checks++;
    if (fault == 0) begin
      if (!ilas_done || ilas_err || cfg.did != 8'h3C || cfg.bid != 4'h7 || cfg.adjcnt != 4'h2
          || cfg.lid != 5'd1 || cfg.m_m1 != 8'd7 || cfg.n_m1 != 5'd15 || cfg.np_m1 != 5'd15
          || cfg.subclassv != 3'd1 || cfg.jesdv != 3'd1 || cfg.cs != 2'd1) begin
        failures++; $display("good ILAS: done %b err %b", ilas_done, ilas_err);
      end
    end else if (ilas_done || !ilas_err) begin
      failures++; $display("fault %0d not detected", fault);
    end
    enable = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int f = 0; f <= 4; f++) run(f);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
