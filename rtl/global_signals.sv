// global_signals: reset and SYSREF conditioning shared by every link.
//
// The active-low reset_n is asserted asynchronously and released through a
// two-flop synchroniser, giving the active-high, clock-synchronous rst used
// by all other blocks. SYSREF is sampled by two flops and a rising edge is
// turned into a one-cycle pulse, sysref_edge, which restarts the LMFC
// counter. Timing: sysref_edge is high for the cycle that follows the second
// clock edge sampling SYSREF high; rst falls 2 edges after reset_n is released.
// The paper only names a "Global Signals" block beside the clock and reset
// inputs; synchroniser depth and the edge detector are this design's choice.
module global_signals (
  input  logic clk,
  input  logic reset_n,
  input  logic sysref,
  output logic rst,
  output logic sysref_edge
);
  logic [1:0] rst_sync;
  logic [2:0] sysref_q;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) rst_sync <= 2'b11;
    else          rst_sync <= {rst_sync[0], 1'b0};
  end
  assign rst = rst_sync[1];

  always_ff @(posedge clk) begin
    if (rst) sysref_q <= '0;
    else     sysref_q <= {sysref_q[1:0], sysref};
  end
  assign sysref_edge = sysref_q[1] & ~sysref_q[2];
endmodule
