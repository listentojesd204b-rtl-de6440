// jesd_tx_model: behavioural JESD204B Subclass 1 transmitter plus lane
// channel, for simulation only.
//
// One instance drives the L lanes of one link as a transceiver would after
// 8b/10b decoding. It keeps its own LMFC (reset by SYSREF rising edges),
// sends /K28.5/ while sync_n is low, starts the four-multiframe ILAS on the
// first LMFC boundary at which sync_n is high, then sends user data word n of
// lane l = tx_data_word(LINK, l, n) (or, with PAYLOAD = 1 or 2, ADC samples
// from afe_lane_word: ramp or sine), scrambled with 1 + x^14 + x^15 when SCR
// is set. The scrambler is written bit-serially and independently of the
// receiver's parallel descrambler; its state is the last 15 bits sent on the
// lane, ILAS included. The channel delays each lane by skew[l] words and
// shifts its octet stream by rot[l] octets (a transceiver word boundary that
// is not the frame boundary); dec_err[l] flags a disparity error on the
// lane's next word; bad_fchk corrupts the ILAS checksum.
module jesd_tx_model
  import jesd_pkg::*;
  import jesd_tb_pkg::*;
#(
  parameter int unsigned L    = 4,
  parameter int unsigned F    = 16,
  parameter int unsigned K    = 16,
  parameter bit          SCR  = 1'b1,
  parameter int unsigned LINK = 0,
  parameter int unsigned PAYLOAD = 0   // 0: tx_data_word, 1/2: afe_lane_word mode
) (
  input  logic                clk,
  input  logic                sysref,
  input  logic                sync_n,
  input  int unsigned         skew [L],
  input  int unsigned         rot  [L],
  input  logic [L-1:0]        dec_err,
  input  logic                bad_fchk,
  output gt_word_t [L-1:0]    gtx,
  output int unsigned         data_words_sent
);
  localparam int unsigned MFW   = F * K / 4;
  localparam int unsigned MAXD  = 512;

  typedef enum {TX_CGS, TX_ILAS, TX_DATA} tx_state_e;
  tx_state_e   st = TX_CGS;
  int unsigned lmfc = 0;
  int unsigned widx = 0;
  logic        sysref_q = 1'b0;
  logic [14:0] hist [L];
  logic [35:0] line [L][MAXD];   // {charisk, data}
  int unsigned wp = 0;
  logic [31:0] prev_d [L];
  logic [3:0]  prev_k [L];

  initial begin
    for (int l = 0; l < L; l++) begin
      hist[l] = '0;
      prev_d[l] = {4{K28_5}};
      prev_k[l] = 4'hF;
      for (int d = 0; d < MAXD; d++) line[l][d] = {4'hF, {4{K28_5}}};
    end
    data_words_sent = 0;
    gtx = '0;
  end

  // Field sum of the configuration, written out field by field.
  function automatic logic [7:0] fsum(input logic [13:0][7:0] c);
    int s;
    s = int'(c[0]) + int'(c[1][7:4]) + int'(c[1][3:0]) + int'(c[2][6]) + int'(c[2][5])
      + int'(c[2][4:0]) + int'(c[3][7]) + int'(c[3][4:0]) + int'(c[4]) + int'(c[5][4:0])
      + int'(c[6]) + int'(c[7][7:6]) + int'(c[7][4:0]) + int'(c[8][7:5]) + int'(c[8][4:0])
      + int'(c[9][7:5]) + int'(c[9][4:0]) + int'(c[10][7]) + int'(c[10][4:0])
      + int'(c[11]) + int'(c[12]);
    return 8'(s);
  endfunction

  function automatic logic [13:0][7:0] cfg_octets(input int unsigned lane);
    logic [13:0][7:0] c;
    c[0]  = 8'hA5;                        // DID
    c[1]  = {4'd0, 4'(LINK)};             // ADJCNT, BID
    c[2]  = {3'd0, 5'(lane)};             // LID
    c[3]  = {SCR, 2'd0, 5'(L - 1)};
    c[4]  = 8'(F - 1);
    c[5]  = {3'd0, 5'(K - 1)};
    c[6]  = 8'd15;                        // M-1
    c[7]  = {2'd0, 1'b0, 5'd15};          // CS, N-1
    c[8]  = {3'd1, 5'd15};                // SUBCLASSV = 1, N'-1
    c[9]  = {3'd1, 5'd0};                 // JESDV = 1 (B), S-1
    c[10] = 8'd0;                         // HD, CF
    c[11] = 8'd0;
    c[12] = 8'd0;
    c[13] = fsum(c);
    return c;
  endfunction

  // One ILAS word: {charisk, data} for lane, word index w (0 .. 4*MFW-1).
  function automatic logic [35:0] ilas_word(input int unsigned lane,
                                            input int unsigned w,
                                            input logic corrupt);
    logic [13:0][7:0] c;
    logic [35:0] r;
    int unsigned m, o;
    c = cfg_octets(lane);
    if (corrupt) c[13] = c[13] ^ 8'h01;
    m = w / MFW;
    r = '0;
    for (int b = 0; b < 4; b++) begin
      o = 4 * (w % MFW) + b;
      r[8*b +: 8] = 8'(o + 16 * m);       // filler octets
      if (o == 0)                 begin r[8*b +: 8] = K28_0; r[32+b] = 1'b1; end
      else if (o == F * K - 1)    begin r[8*b +: 8] = K28_3; r[32+b] = 1'b1; end
      else if (m == 1 && o == 1)  begin r[8*b +: 8] = K28_4; r[32+b] = 1'b1; end
      else if (m == 1 && o <= 15) r[8*b +: 8] = c[o-2];
    end
    return r;
  endfunction

  // Serial scrambler, octet 0 first, MSB first.
  function automatic logic [31:0] scramble(inout logic [14:0] h,
                                           input logic [31:0] d);
    logic [31:0] s;
    logic        b, o;
    for (int oct = 0; oct < 4; oct++)
      for (int bit_i = 7; bit_i >= 0; bit_i--) begin
        b = d[8*oct + bit_i];
        o = b ^ h[13] ^ h[14];
        h = {h[13:0], o};
        s[8*oct + bit_i] = o;
      end
    return s;
  endfunction

  function automatic void push_hist(inout logic [14:0] h, input logic [31:0] d);
    for (int oct = 0; oct < 4; oct++)
      for (int bit_i = 7; bit_i >= 0; bit_i--) h = {h[13:0], d[8*oct + bit_i]};
  endfunction

  always @(posedge clk) begin
    logic [35:0] w [L];
    logic        rise;
    rise     = sysref && !sysref_q;
    sysref_q <= sysref;

    // Transmitter state machine.
    if (!sync_n) st = TX_CGS;
    else if (st == TX_CGS && lmfc == 0) begin st = TX_ILAS; widx = 0; end
    for (int l = 0; l < L; l++) begin
      logic [31:0] d;
      logic [14:0] h;
      case (st)
        TX_CGS:  w[l] = {4'hF, {4{K28_5}}};
        TX_ILAS: w[l] = ilas_word(l, widx, bad_fchk);
        default: begin
          d = (PAYLOAD == 0) ? tx_data_word(LINK, l, widx)
                             : afe_lane_word(PAYLOAD, l, widx, F);
          h = hist[l];
          if (SCR) w[l] = {4'h0, scramble(h, d)};
          else     w[l] = {4'h0, d};
          hist[l] = h;
        end
      endcase
      if (st != TX_DATA || !SCR) begin
        h = hist[l];
        push_hist(h, w[l][31:0]);
        hist[l] = h;
      end
      line[l][wp] = w[l];
    end
    if (st == TX_ILAS) begin
      widx++;
      if (widx == 4 * MFW) begin st = TX_DATA; widx = 0; end
    end else if (st == TX_DATA) begin
      widx++;
      data_words_sent = widx;
    end

    // Channel: per-lane delay and octet shift, then the error flags.
    for (int l = 0; l < L; l++) begin
      logic [35:0] cur;
      logic [63:0] catd;
      logic [7:0]  catk;
      int unsigned r;
      cur  = line[l][(wp + MAXD - skew[l]) % MAXD];
      r    = rot[l] % 4;
      catd = {cur[31:0], prev_d[l]};
      catk = {cur[35:32], prev_k[l]};
      gtx[l].data       <= catd[8*(4-r) +: 32];
      gtx[l].charisk    <= catk[(4-r) +: 4];
      gtx[l].disperr    <= {3'b0, dec_err[l]};
      gtx[l].notintable <= '0;
      prev_d[l] = cur[31:0];
      prev_k[l] = cur[35:32];
    end
    wp = (wp + 1) % MAXD;

    // Own LMFC.
    if (rise) lmfc = 1 % MFW;
    else      lmfc = (lmfc + 1) % MFW;
  end
endmodule
