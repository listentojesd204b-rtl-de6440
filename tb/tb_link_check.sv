// tb_link_check: scoreboard for the output of one receiver link.
//
// Each word with rx_valid must carry, on every lane l, the transmitter's
// user-data word n (same n on all lanes: lanes are aligned), n counting from
// 0 after every new ILAS. The expected count restarts whenever the link is
// not in ST_SYNCED. rx_frame must flag octet i of a word when that octet
// opens a frame of F octets, counted from the first data octet. first_valid
// pulses with the first valid word of each synchronisation.
module tb_link_check
  import jesd_pkg::*;
  import jesd_tb_pkg::*;
#(
  parameter int unsigned L    = 4,
  parameter int unsigned F    = 16,
  parameter int unsigned LINK = 0
) (
  input  logic            clk,
  input  logic [32*L-1:0] rx_data,
  input  logic            rx_valid,
  input  logic [3:0]      rx_frame,
  input  link_state_t     state,
  output int              checks,
  output int              failures,
  output int              words,
  output int              frame_flags,
  output logic            first_valid
);
  int unsigned n = 0;
  initial begin checks = 0; failures = 0; words = 0; frame_flags = 0; first_valid = 0; end

  always @(posedge clk) begin
    first_valid <= 1'b0;
    if (state != ST_SYNCED) n = 0;
    else if (rx_valid) begin
      logic [3:0] fexp;
      if (n == 0) first_valid <= 1'b1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rx_data[32*l +: 32] !== tx_data_word(LINK, l, n)) begin
          failures++;
          if (failures < 10)
            $display("link %0d lane %0d word %0d: got %08h expected %08h", LINK, l, n,
                     rx_data[32*l +: 32], tx_data_word(LINK, l, n));
        end
      end
      for (int i = 0; i < 4; i++) fexp[i] = ((4 * n + i) % F) == 0;
      checks++;
      if (rx_frame !== fexp) begin
        failures++;
        if (failures < 10) $display("link %0d word %0d: rx_frame %b expected %b", LINK, n, rx_frame, fexp);
      end
      if (|fexp) frame_flags++;
      n++;
      words++;
    end
  end
endmodule
