// jesd_pkg: types and constants shared by the JESD204B Subclass 1 receiver.
//
// The receiver works on 32-bit words, i.e. four octets per clock, octet 0 in
// bits [7:0] being the first octet on the wire. A transceiver word carries
// the 8b/10b-decoded octets plus, per octet, the control-character flag and
// the two error flags a Xilinx-style GT reports (disparity, not-in-table).
// Control-character codes and the ILAS configuration layout are those of the
// JESD204B standard; the paper only names /K28.5/, CGS and ILAS.
package jesd_pkg;

  // 8b/10b control characters used by JESD204B (value of the decoded octet).
  localparam logic [7:0] K28_0 = 8'h1C;  // /R/  start of ILAS multiframe
  localparam logic [7:0] K28_3 = 8'h7C;  // /A/  end of multiframe
  localparam logic [7:0] K28_4 = 8'h9C;  // /Q/  start of ILAS configuration
  localparam logic [7:0] K28_5 = 8'hBC;  // /K/  code group synchronisation

  // One word as delivered by the transceiver (PHY) after 8b/10b decoding.
  typedef struct packed {
    logic [31:0] data;
    logic [3:0]  charisk;
    logic [3:0]  disperr;
    logic [3:0]  notintable;
  } gt_word_t;

  // One word inside the lane datapath.
  typedef struct packed {
    logic [31:0] data;
    logic [3:0]  charisk;
  } lane_word_t;

  // Link controller states (names from the paper).
  typedef enum logic [2:0] {
    ST_RESET        = 3'd0,
    ST_WAIT_FOR_PHY = 3'd1,
    ST_CGS          = 3'd2,
    ST_ILAS         = 3'd3,
    ST_SYNCED       = 3'd4
  } link_state_t;

  // ILAS link configuration (second multiframe, octets 2..15), JESD204B
  // layout. Fields holding a count are stored minus one, as on the wire.
  typedef struct packed {
    logic [7:0] did;
    logic [3:0] adjcnt;
    logic [3:0] bid;
    logic       adjdir;
    logic       phadj;
    logic [4:0] lid;
    logic       scr;
    logic [4:0] l_m1;
    logic [7:0] f_m1;
    logic [4:0] k_m1;
    logic [7:0] m_m1;
    logic [1:0] cs;
    logic [4:0] n_m1;
    logic [2:0] subclassv;
    logic [4:0] np_m1;
    logic [2:0] jesdv;
    logic [4:0] s_m1;
    logic       hd;
    logic [4:0] cf;
    logic [7:0] res1;
    logic [7:0] res2;
    logic [7:0] fchk;
  } ilas_cfg_t;

  // Unpack the 14 configuration octets (index 0 = first octet after /Q/).
  function automatic ilas_cfg_t ilas_unpack(input logic [13:0][7:0] o);
    ilas_cfg_t c;
    c.did       = o[0];
    c.adjcnt    = o[1][7:4];
    c.bid       = o[1][3:0];
    c.adjdir    = o[2][6];
    c.phadj     = o[2][5];
    c.lid       = o[2][4:0];
    c.scr       = o[3][7];
    c.l_m1      = o[3][4:0];
    c.f_m1      = o[4];
    c.k_m1      = o[5][4:0];
    c.m_m1      = o[6];
    c.cs        = o[7][7:6];
    c.n_m1      = o[7][4:0];
    c.subclassv = o[8][7:5];
    c.np_m1     = o[8][4:0];
    c.jesdv     = o[9][7:5];
    c.s_m1      = o[9][4:0];
    c.hd        = o[10][7];
    c.cf        = o[10][4:0];
    c.res1      = o[11];
    c.res2      = o[12];
    c.fchk      = o[13];
    return c;
  endfunction

  // FCHK: sum of all configuration fields modulo 256 (JESD204B definition).
  function automatic logic [7:0] ilas_checksum(input ilas_cfg_t c);
    logic [7:0] s;
    s = c.did + 8'(c.adjcnt) + 8'(c.bid) + 8'(c.adjdir) + 8'(c.phadj)
      + 8'(c.lid) + 8'(c.scr) + 8'(c.l_m1) + c.f_m1 + 8'(c.k_m1) + c.m_m1
      + 8'(c.cs) + 8'(c.n_m1) + 8'(c.subclassv) + 8'(c.np_m1) + 8'(c.jesdv)
      + 8'(c.s_m1) + 8'(c.hd) + 8'(c.cf) + c.res1 + c.res2;
    return s;
  endfunction

  // True when octet i of a word is the control character code.
  function automatic logic is_ctrl(input lane_word_t w, input int unsigned i,
                                   input logic [7:0] code);
    return w.charisk[i] && (w.data[8*i +: 8] == code);
  endfunction

endpackage
