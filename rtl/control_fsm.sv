// control_fsm: link initialisation controller of one JESD204B link.
//
// States (named as in the paper):
//   ST_RESET        rx_reset_gt high for RESET_CYCLES cycles (GT reset pulse)
//   ST_WAIT_FOR_PHY waits for the transceiver's rx_reset_done
//   ST_CGS          SYNC asserted (sync_n low), comma alignment enabled; all
//                   lanes must report CGS for CGS_STABLE_CYCLES consecutive
//                   cycles (stability counter) and SYSREF must have set the
//                   LMFC; SYNC is then released on an LMFC boundary
//   ST_ILAS         waits until every lane has checked its ILAS and the
//                   elastic buffers have been released
//   ST_SYNCED       user data flows; rx_valid may rise
// Faults: an ILAS error, a buffer overflow or no ILAS within ILAS_TIMEOUT
// cycles send ST_ILAS back to ST_CGS (SYNC re-asserted). In ST_SYNCED,
// ERR_THRESHOLD words with decoding errors (disparity / not-in-table), or a
// buffer overflow, lead back to ST_RESET, as drawn in the paper's state
// diagram ("Frame Errors Detected"). lane_clear is high in ST_RESET and
// ST_WAIT_FOR_PHY and for one cycle on every entry to ST_CGS; it restarts
// the lane FSMs, ILAS monitors and buffers.
// Interface: sync_n is the JESD204B SYNC~ output (active low).
// Assertions check that SYNC~ is released on an LMFC boundary and that only
// the transitions listed above are taken.
// The five states, the stability counter and the configurable fault
// threshold follow the paper; the counter values, the ILAS timeout and the
// choice of which fault goes to which state are this design's.
module control_fsm
  import jesd_pkg::*;
#(
  parameter int unsigned L                 = 4,
  parameter int unsigned RESET_CYCLES      = 16,
  parameter int unsigned CGS_STABLE_CYCLES = 8,
  parameter int unsigned ERR_THRESHOLD     = 4,
  parameter int unsigned ILAS_TIMEOUT      = 4096
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         rx_reset_done,
  input  logic         lmfc_tick,
  input  logic         lmfc_locked,
  input  logic [L-1:0] lane_cgs_done,
  input  logic [L-1:0] lane_ilas_done,
  input  logic [L-1:0] lane_ilas_err,
  input  logic [L-1:0] lane_dec_err,
  input  logic         buffers_released,
  input  logic         buffer_overflow,
  output link_state_t  state,
  output logic         sync_n,
  output logic         gtx_en_char_align,
  output logic         rx_reset_gt,
  output logic         lane_clear,
  output logic         cgs_stable,
  output logic         ilas_enable,
  output logic         synced
);
  localparam int unsigned CNTW = $clog2(ILAS_TIMEOUT + RESET_CYCLES
                                        + CGS_STABLE_CYCLES + 2);

  link_state_t    nxt;
  logic [CNTW-1:0] cnt;        // cycle counter (reset pulse, stability, timeout)
  logic [$clog2(ERR_THRESHOLD+1)-1:0] err_cnt;
  logic            enter_cgs;

  assign cgs_stable = (32'(cnt) >= CGS_STABLE_CYCLES) && (state == ST_CGS);

  always_comb begin
    nxt = state;
    unique case (state)
      ST_RESET:        if (32'(cnt) >= RESET_CYCLES - 1) nxt = ST_WAIT_FOR_PHY;
      ST_WAIT_FOR_PHY: if (rx_reset_done) nxt = ST_CGS;
      ST_CGS:          if (cgs_stable && lmfc_locked && lmfc_tick) nxt = ST_ILAS;
      ST_ILAS: begin
        if ((|lane_ilas_err) || buffer_overflow || 32'(cnt) >= ILAS_TIMEOUT)
          nxt = ST_CGS;
        else if ((&lane_ilas_done) && buffers_released)
          nxt = ST_SYNCED;
      end
      ST_SYNCED: begin
        if (buffer_overflow || 32'(err_cnt) >= ERR_THRESHOLD) nxt = ST_RESET;
      end
      default:         nxt = ST_RESET;
    endcase
  end

  assign enter_cgs = (nxt == ST_CGS) && (state != ST_CGS);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= ST_RESET;
      cnt        <= '0;
      err_cnt    <= '0;
      lane_clear <= 1'b1;
    end else begin
      state      <= nxt;
      lane_clear <= (nxt == ST_RESET) || (nxt == ST_WAIT_FOR_PHY) || enter_cgs;
      if (nxt != state) begin
        cnt <= '0;
      end else if (state == ST_CGS) begin
        // Stability counter: counts cycles with CGS on all lanes.
        if (!(&lane_cgs_done)) cnt <= '0;
        else if (!cgs_stable)  cnt <= cnt + 1'b1;
      end else if (32'(cnt) < ILAS_TIMEOUT + RESET_CYCLES) begin
        cnt <= cnt + 1'b1;
      end
      if (state != ST_SYNCED || nxt != ST_SYNCED) err_cnt <= '0;
      else if ((|lane_dec_err) && 32'(err_cnt) < ERR_THRESHOLD)
        err_cnt <= err_cnt + 1'b1;
    end
  end

  assign sync_n            = !(state == ST_RESET || state == ST_WAIT_FOR_PHY
                               || state == ST_CGS);
  assign gtx_en_char_align = (state == ST_WAIT_FOR_PHY) || (state == ST_CGS);
  assign rx_reset_gt       = (state == ST_RESET);
  assign ilas_enable       = (state == ST_ILAS);
  assign synced            = (state == ST_SYNCED);

  // SYNC~ is released only on an LMFC boundary (Subclass 1).
  a_sync_on_lmfc: assert property (@(posedge clk) disable iff (rst)
    (state == ST_CGS && nxt == ST_ILAS) |-> lmfc_tick);

  // Only the transitions listed above are taken.
  function automatic logic legal_step(input link_state_t a, input link_state_t b);
    unique case (a)
      ST_RESET:        return b == ST_WAIT_FOR_PHY;
      ST_WAIT_FOR_PHY: return b == ST_CGS;
      ST_CGS:          return b == ST_ILAS;
      ST_ILAS:         return b == ST_CGS || b == ST_SYNCED;
      ST_SYNCED:       return b == ST_RESET;
      default:         return b == ST_RESET;
    endcase
  endfunction

  a_legal_step: assert property (@(posedge clk) disable iff (rst)
    (nxt != state) |-> legal_step(state, nxt));
endmodule
