// tb_octet_align: for each octet shift r = 0..3 the aligner sees /K28.5/
// with hold high, then, after hold falls, an ILAS-like stream whose first
// non-/K/ octet (/R/) sits at octet r of the word. Two cycles after each
// input word the output must be the unshifted stream with /R/ in octet 0,
// and `offset` must equal r.
`timescale 1ns/1ps
module tb_octet_align;
  import jesd_pkg::*;
  logic clk = 0, rst = 1, hold = 1, aligned;
  logic [1:0] offset;
  lane_word_t in, out;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  octet_align dut (.clk, .rst, .hold, .in, .out, .aligned, .offset);

  // Reference stream: octets 0..N with control flags. Octet index s < 0 is /K/.
  function automatic logic [8:0] ref_octet(input int s);
    if (s < 0)  return {1'b1, K28_5};
    if (s == 0) return {1'b1, K28_0};
    return {1'b0, 8'(s * 7 + 3)};
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '{data: {4{K28_5}}, charisk: 4'hF};
    repeat (2) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 4; r++) begin
      hold = 1;
      in = '{data: {4{K28_5}}, charisk: 4'hF};
      repeat (4) @(negedge clk);
      hold = 0;
      repeat (3) @(negedge clk);
      // Input word w holds stream octets 4w - r + j, stream starts at w = 2.
      for (int w = 0; w < 14; w++) begin
        for (int j = 0; j < 4; j++) begin
          logic [8:0] o;
          o = ref_octet(4 * (w - 2) + j - r);
          in.data[8*j +: 8] = o[7:0];
          in.charisk[j]     = o[8];
        end
        @(negedge clk);
        // Output now holds stream octets 4(w-3)+j: /R/ first when w = 3.
        if (w >= 3) begin
          for (int j = 0; j < 4; j++) begin
            logic [8:0] e;
            e = ref_octet(4 * (w - 3) + j);
            checks++;
            if ({out.charisk[j], out.data[8*j +: 8]} !== e) begin
              failures++;
              if (failures < 6) $display("r=%0d w=%0d octet %0d: got %h expected %h", r, w, j,
                                         {out.charisk[j], out.data[8*j +: 8]}, e);
            end
          end
        end
      end
      checks++;
      if (!aligned || offset != 2'(r)) begin failures++; $display("r=%0d offset %0d", r, offset); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
