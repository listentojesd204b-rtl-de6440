// frame_marker: frame-start flags for the aligned output words.
//
// The released stream starts on a multiframe boundary, which is also a frame
// boundary. The marker keeps the position, modulo F, of octet 0 of the
// current output word, advancing by 4 octets per valid word, and flags in
// frame[i] that octet i of the word is octet 0 of a frame. Because
// 4 <= F, pos + i < 2F, so a frame starts at octet i exactly when
// pos + i is 0 or F. `start` marks the first valid word (pos = 0).
// Timing: combinational from the registered position, aligned with `valid`.
// The paper names a Frame Marker driving rx_frame; the per-octet flag format
// is this design's choice.
module frame_marker #(
  parameter int unsigned F = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic       valid,
  output logic [3:0] frame
);
  localparam int unsigned PW = $clog2(F + 4);
  logic [PW-1:0] pos, cur, nxt;

  assign cur = start ? '0 : pos;

  always_comb begin
    for (int i = 0; i < 4; i++)
      frame[i] = valid && ((32'(cur) + i == 0) || (32'(cur) + i == F));
    nxt = (32'(cur) + 4 >= F) ? PW'(32'(cur) + 4 - F) : PW'(32'(cur) + 4);
  end

  always_ff @(posedge clk) begin
    if (rst)        pos <= '0;
    else if (valid) pos <= nxt;
  end
endmodule
