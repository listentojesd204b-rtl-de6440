// octet_align: octet alignment of one lane's 4-octet words.
//
// The transceiver delivers four decoded octets per clock, but the word
// boundary it chose need not coincide with the JESD204B frame boundary. While
// `hold` is high (the link is in code group synchronisation and only /K28.5/
// arrives) the aligner is disarmed. Once `hold` falls, the first octet that
// follows a /K28.5/ and is not itself /K28.5/ (the /R/ that opens the ILAS)
// marks octet 0 of a frame: its position in the word is latched as the
// rotation offset and `aligned` rises. From then on every output word is the
// four octets starting at that offset in the stream {previous word, current
// word}, so the /R/ and every later frame start land in octet 0.
// Timing: two clock cycles from `in` to `out` (one word of history plus an
// output register). The paper says the module detects /K28.5/ and rotates
// the words; using the /K/-to-non-/K/ boundary to pick the rotation is this
// design's reading of that.
module octet_align
  import jesd_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       hold,      // high: disarm and forget the offset
  input  lane_word_t in,
  output lane_word_t out,
  output logic       aligned,
  output logic [1:0] offset
);
  lane_word_t prev;
  logic [3:0] is_k;
  logic       prev_k3;
  logic [3:0] boundary;
  logic [1:0] found_pos;
  logic       found;

  // /K28.5/ octets of the current word and of the last octet of the previous.
  always_comb begin
    for (int i = 0; i < 4; i++) is_k[i] = is_ctrl(in, i, K28_5);
    prev_k3     = is_ctrl(prev, 3, K28_5);
    boundary[0] = prev_k3 && !is_k[0];
    for (int i = 1; i < 4; i++) boundary[i] = is_k[i-1] && !is_k[i];
    found     = |boundary;
    found_pos = 2'd0;
    for (int i = 3; i >= 0; i--) if (boundary[i]) found_pos = 2'(i);
  end

  always_ff @(posedge clk) begin
    if (rst || hold) begin
      aligned <= 1'b0;
      offset  <= 2'd0;
    end else if (!aligned && found) begin
      aligned <= 1'b1;
      offset  <= found_pos;
    end
  end

  // Rotation: out octet j = stream octet (offset + j) of {in, prev}.
  logic [63:0] cat_d;
  logic [7:0]  cat_k;
  assign cat_d = {in.data, prev.data};
  assign cat_k = {in.charisk, prev.charisk};

  always_ff @(posedge clk) begin
    if (rst) begin
      prev <= '0;
      out  <= '0;
    end else begin
      prev         <= in;
      out.data     <= cat_d[8*offset +: 32];
      out.charisk  <= cat_k[{1'b0, offset} +: 4];
    end
  end
endmodule
