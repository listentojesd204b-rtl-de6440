// lmfc_gen: SYSREF-synchronised local multiframe clock (LMFC).
//
// A counter of 32-bit words rolls over every F*K octets, i.e. every F*K/4
// clock cycles, and is forced back to zero by every SYSREF edge, so the
// multiframe boundaries sit at a repeatable distance from SYSREF (JESD204B
// Subclass 1). lmfc_tick is high in the cycle in which the counter is zero,
// the first word of a local multiframe. lmfc_locked goes high at the first
// SYSREF edge; before it the counter free-runs from reset.
// The counter reset on SYSREF and the F*K-octet period follow the paper;
// counting words instead of octets follows from its 4-octet datapath.
module lmfc_gen #(
  parameter int unsigned F = 16,   // octets per frame
  parameter int unsigned K = 16    // frames per multiframe
) (
  input  logic clk,
  input  logic rst,
  input  logic sysref_edge,
  output logic lmfc_tick,
  output logic lmfc_locked,
  output logic [$clog2(F*K/4+1)-1:0] lmfc_cnt
);
  localparam int unsigned PERIOD = F * K / 4;   // words per multiframe

  if ((F * K) % 4 != 0) begin : g_bad_fk
    $error("lmfc_gen: F*K must be a multiple of 4");
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      lmfc_cnt    <= '0;
      lmfc_locked <= 1'b0;
    end else if (sysref_edge) begin
      lmfc_cnt    <= '0;
      lmfc_locked <= 1'b1;
    end else if (32'(lmfc_cnt) == PERIOD - 1) begin
      lmfc_cnt    <= '0;
    end else begin
      lmfc_cnt    <= lmfc_cnt + 1'b1;
    end
  end

  assign lmfc_tick = (lmfc_cnt == '0);
endmodule
