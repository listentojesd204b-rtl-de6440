// buffer_release: joint release of all elastic buffers of a link.
//
// While `enable` is high it watches the `ready` flags of the L lane buffers;
// at the first LMFC boundary (lmfc_tick) at which all of them are ready it
// raises release_o, which stays high until `restart`, and gives a one-cycle
// release_pulse. Releasing on an LMFC boundary makes the delay from SYSREF to
// the output repeatable from one link start-up to the next (deterministic
// latency, JESD204B Subclass 1).
// Timing: release_o is combinationally high in the boundary cycle itself and
// registered afterwards, so buffers start reading on the boundary word.
// The central module that waits for all buffers follows the paper; releasing
// on the first boundary (no extra release delay) is this design's choice.
module buffer_release #(
  parameter int unsigned L = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         restart,
  input  logic         enable,
  input  logic         lmfc_tick,
  input  logic [L-1:0] lane_ready,
  output logic         release_o,
  output logic         release_pulse
);
  logic released;

  assign release_pulse = !released && enable && lmfc_tick && (&lane_ready);
  assign release_o     = released || release_pulse;

  always_ff @(posedge clk) begin
    if (rst || restart)     released <= 1'b0;
    else if (release_pulse) released <= 1'b1;
  end
endmodule
