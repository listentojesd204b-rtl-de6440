// data_path: the complete receive datapath of one JESD204B lane.
//
// Stages, four octets per clock:
//   input register -> octet_align -> descrambler -> elastic_buffer -> output register
// The CGS FSM and the ILAS monitor watch the unscrambled (raw) words at the
// descrambler output, as drawn in the paper. The ILAS monitor classifies
// each word; ILAS words are buffered unchanged and user-data words are
// buffered descrambled (when DESCRAMBLING = 1), each with a flag telling
// which is which. Writing into the elastic buffer starts at the first ILAS
// word; reading starts when the link releases all buffers together.
// Timing: input reg 1, octet_align 2, descrambler 1 cycle to the buffer
// write; buffer read 1 and output register 1 cycle after release.
// dec_err reports a disparity or not-in-table error in the registered input
// word. The chain of stages follows the paper's data path figure; the
// classification flag stored with each word is this design's choice.
module data_path
  import jesd_pkg::*;
#(
  parameter int unsigned L            = 4,
  parameter int unsigned F            = 16,
  parameter int unsigned K            = 16,
  parameter bit          DESCRAMBLING = 1'b1,
  parameter int unsigned BUFFER_DEPTH = 128,
  parameter int unsigned K_MIN_OCTETS = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  gt_word_t    gtx,
  // control from the link
  input  logic        lane_clear,
  input  logic        align_hold,
  input  logic        ilas_enable,
  input  logic        buf_release,
  // status to the link
  output logic        cgs_done,
  output logic        ilas_done,
  output logic        ilas_err,
  output ilas_cfg_t   ilas_cfg,
  output logic        aligned,
  output logic        buf_ready,
  output logic        buf_overflow,
  output logic        dec_err,
  // aligned output
  output logic [31:0] out_data,
  output logic        out_is_data,
  output logic        out_valid
);
  gt_word_t    in_q;
  lane_word_t  al_out, raw;
  logic [31:0] dsc;
  logic [1:0]  al_off;
  logic        k_word, ilas_start, in_ilas, is_data;
  logic [32:0] rd_word;
  logic        rd_valid;

  // Input register.
  always_ff @(posedge clk) begin
    if (rst) in_q <= '0;
    else     in_q <= gtx;
  end
  assign dec_err = |(in_q.disperr | in_q.notintable);

  octet_align u_align (
    .clk, .rst, .hold(align_hold),
    .in('{data: in_q.data, charisk: in_q.charisk}),
    .out(al_out), .aligned, .offset(al_off)
  );

  descrambler #(.ENABLE(DESCRAMBLING)) u_dscr (
    .clk, .rst, .in(al_out), .raw, .data(dsc)
  );

  cgs_fsm #(.K_MIN_OCTETS(K_MIN_OCTETS)) u_cgs (
    .clk, .rst, .restart(lane_clear), .in(raw), .cgs_done, .k_word
  );

  ilas_monitor #(.L(L), .F(F), .K(K), .SCR(DESCRAMBLING)) u_ilas (
    .clk, .rst, .restart(lane_clear), .enable(ilas_enable), .in(raw),
    .ilas_start, .in_ilas, .is_data, .ilas_done, .ilas_err, .cfg(ilas_cfg)
  );

  elastic_buffer #(.DEPTH(BUFFER_DEPTH), .WIDTH(33)) u_ebuf (
    .clk, .rst, .restart(lane_clear), .wr_start(ilas_start),
    .wr_data({is_data, is_data ? dsc : raw.data}),
    .release_i(buf_release), .ready(buf_ready),
    .rd_data(rd_word), .rd_valid, .overflow(buf_overflow)
  );

  // Output register.
  always_ff @(posedge clk) begin
    if (rst || lane_clear) begin
      out_data    <= '0;
      out_is_data <= 1'b0;
      out_valid   <= 1'b0;
    end else begin
      out_data    <= rd_word[31:0];
      out_is_data <= rd_word[32] && rd_valid;
      out_valid   <= rd_valid;
    end
  end
endmodule
