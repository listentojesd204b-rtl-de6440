// descrambler: 32-bit parallel self-synchronous JESD204B descrambler.
//
// JESD204B scrambles user data bit-serially, MSB of each octet first and
// octet 0 of a word first, with a self-synchronous scrambler whose state is
// the last 15 transmitted bits. The receiver undoes it with
//     d[n] = s[n] ^ s[n-14] ^ s[n-15]
// where s is the received bit stream. Here 32 bits are handled per clock:
// the word's bits, preceded by the 15 received bits of the previous words,
// form a 47-bit window from which all 32 output bits follow at once. The
// history is always updated from the received stream, so the descrambler
// also runs through CGS and ILAS; the caller picks, word by word, either
// the unmodified word (raw) or the descrambled data.
// Timing: one register stage; raw and data leave together, one cycle after
// `in`. With ENABLE = 0 `data` equals the raw data (scrambling off).
// The paper gives the polynomial as G(x) = x^14 + x^13 + 1; taken as tap
// positions 13 and 14 of a zero-indexed 15-bit history register (delays 14
// and 15) that is the standard 1 + x^14 + x^15, which is what is built.
module descrambler
  import jesd_pkg::*;
#(
  parameter bit ENABLE = 1'b1
) (
  input  logic        clk,
  input  logic        rst,
  input  lane_word_t  in,
  output lane_word_t  raw,
  output logic [31:0] data
);
  logic [14:0] hist;      // hist[14] oldest ... hist[0] most recent bit
  logic [46:0] win;       // win[46:32] history, win[31:0] bits of this word
  logic [31:0] sbits;     // sbits[31] = first bit on the wire
  logic [31:0] dbits;
  logic [31:0] dword;

  always_comb begin
    // Serial order: octet 0 MSB first -> sbits[31].
    for (int o = 0; o < 4; o++)
      for (int b = 0; b < 8; b++)
        sbits[31 - 8*o - (7 - b)] = in.data[8*o + b];
    win = {hist, sbits};
    // Bit at window index t (t <= 31) has its 14- and 15-bit-old bits at
    // t+14 and t+15.
    for (int t = 0; t < 32; t++) dbits[t] = win[t] ^ win[t+14] ^ win[t+15];
    for (int o = 0; o < 4; o++)
      for (int b = 0; b < 8; b++)
        dword[8*o + b] = dbits[31 - 8*o - (7 - b)];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hist <= '0;
      raw  <= '0;
      data <= '0;
    end else begin
      hist <= sbits[14:0];
      raw  <= in;
      data <= ENABLE ? dword : in.data;
    end
  end
endmodule
