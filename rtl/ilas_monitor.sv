// ilas_monitor: per-lane check of the initial lane alignment sequence.
//
// After CGS the transmitter sends four multiframes of F*K octets: each
// starts with /R/ (K28.0) and ends with /A/ (K28.3); the second one carries
// /Q/ (K28.4) in octet 1 and the 14 link configuration octets in octets
// 2..15. Because octet_align puts /R/ into octet 0, the ILAS occupies
// exactly F*K words. When `enable` is high the monitor waits for a word
// whose octet 0 is /R/ (ilas_start, combinational), then checks every
// control octet position of the four multiframes, stores the configuration
// octets and, after the last word, compares L, F, K and SCR with this
// receiver's parameters and FCHK with the sum of the fields.
// Outputs per current word: in_ilas (word belongs to the ILAS) and is_data
// (user data follows the ILAS). ilas_done rises after the last ILAS word
// without error; ilas_err is sticky until `restart`.
// The paper says only that all multiframes are checked for valid
// configuration fields; the octet positions and field layout are those of
// JESD204B.
module ilas_monitor
  import jesd_pkg::*;
#(
  parameter int unsigned L           = 4,
  parameter int unsigned F           = 16,
  parameter int unsigned K           = 16,
  parameter bit          SCR         = 1'b1
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       restart,
  input  logic       enable,
  input  lane_word_t in,
  output logic       ilas_start,
  output logic       in_ilas,
  output logic       is_data,
  output logic       ilas_done,
  output logic       ilas_err,
  output ilas_cfg_t  cfg
);
  localparam int unsigned MFW = F * K / 4;          // words per multiframe
  localparam int unsigned WW  = $clog2(MFW + 1);

  if ((F * K) % 4 != 0 || F * K < 20) begin : g_bad_fk
    $error("ilas_monitor: F*K must be a multiple of 4 and at least 20");
  end

  typedef enum logic [1:0] {IM_WAIT, IM_ILAS, IM_DATA} im_state_t;
  im_state_t        state;
  logic [1:0]       mf;         // multiframe index 0..3
  logic [WW-1:0]    wi;         // word index inside the multiframe
  logic [13:0][7:0] cfg_oct;
  logic             word_err;
  logic             cfg_bad;
  ilas_cfg_t        cfg_now;

  assign ilas_start = enable && (state == IM_WAIT) && is_ctrl(in, 0, K28_0);
  assign in_ilas    = ilas_start || (state == IM_ILAS);
  assign is_data    = (state == IM_DATA);

  // Position checks of the current ILAS word.
  logic [1:0]    cur_mf;
  logic [WW-1:0] cur_wi;
  always_comb begin
    cur_mf   = (state == IM_ILAS) ? mf : 2'd0;
    cur_wi   = (state == IM_ILAS) ? wi : '0;
    word_err = 1'b0;
    for (int b = 0; b < 4; b++) begin
      automatic int unsigned o = 4 * 32'(cur_wi) + b;
      if (o == 0) begin
        if (!is_ctrl(in, b, K28_0)) word_err = 1'b1;
      end else if (o == F * K - 1) begin
        if (!is_ctrl(in, b, K28_3)) word_err = 1'b1;
      end else if (cur_mf == 2'd1 && o == 1) begin
        if (!is_ctrl(in, b, K28_4)) word_err = 1'b1;
      end else if (cur_mf == 2'd1 && o >= 2 && o <= 15) begin
        if (in.charisk[b]) word_err = 1'b1;
      end
    end
  end

  assign cfg_now = ilas_unpack(cfg_oct);
  assign cfg     = cfg_now;
  assign cfg_bad = (32'(cfg_now.l_m1) != L - 1) || (32'(cfg_now.f_m1) != F - 1)
                || (32'(cfg_now.k_m1) != K - 1) || (cfg_now.scr != SCR)
                || (cfg_now.fchk != ilas_checksum(cfg_now));

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      state     <= IM_WAIT;
      mf        <= '0;
      wi        <= '0;
      cfg_oct   <= '0;
      ilas_err  <= 1'b0;
      ilas_done <= 1'b0;
    end else begin
      if (in_ilas) begin
        if (word_err) ilas_err <= 1'b1;
        // Capture configuration octets 2..15 of multiframe 1.
        if (cur_mf == 2'd1) begin
          for (int b = 0; b < 4; b++) begin
            automatic int unsigned o = 4 * 32'(cur_wi) + b;
            if (o >= 2 && o <= 15) cfg_oct[o-2] <= in.data[8*b +: 8];
          end
        end
        if (32'(cur_wi) == MFW - 1) begin
          wi <= '0;
          mf <= cur_mf + 1'b1;
          if (cur_mf == 2'd3) state <= IM_DATA;
          else                state <= IM_ILAS;
        end else begin
          wi    <= cur_wi + 1'b1;
          mf    <= cur_mf;
          state <= IM_ILAS;
        end
      end
      // Configuration compared once the whole ILAS has been seen.
      if (state == IM_DATA && !ilas_done && !ilas_err) begin
        if (cfg_bad) ilas_err  <= 1'b1;
        else         ilas_done <= 1'b1;
      end
    end
  end
endmodule
