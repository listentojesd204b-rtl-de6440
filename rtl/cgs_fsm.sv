// cgs_fsm: per-lane code group synchronisation (CGS) monitor.
//
// While the link requests synchronisation, the transmitter sends /K28.5/
// only. The lane FSM walks CS_INIT -> CS_CHECK -> CS_DATA: it enters CS_CHECK
// on a word made entirely of /K28.5/, counts consecutive such words, falls
// back to CS_INIT on any other word, and declares the lane synchronised
// (cgs_done, state CS_DATA) once K_MIN_OCTETS /K28.5/ octets in a row have
// been seen. CS_DATA is left only through `restart`, which the link
// controller raises whenever it (re)starts synchronisation.
// Timing: cgs_done rises one cycle after the word that completes the count.
// The paper says CGS is checked per lane on /K28.5/; the three-state
// structure and the minimum of 4 octets are taken from JESD204B.
module cgs_fsm
  import jesd_pkg::*;
#(
  parameter int unsigned K_MIN_OCTETS = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       restart,
  input  lane_word_t in,
  output logic       cgs_done,
  output logic       k_word      // current word is all /K28.5/
);
  localparam int unsigned NEED = (K_MIN_OCTETS + 3) / 4;   // words
  localparam int unsigned CW   = $clog2(NEED + 1);

  typedef enum logic [1:0] {CS_INIT, CS_CHECK, CS_DATA} cs_state_t;
  cs_state_t     state;
  logic [CW-1:0] cnt;

  always_comb begin
    k_word = 1'b1;
    for (int i = 0; i < 4; i++) k_word &= is_ctrl(in, i, K28_5);
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      state <= CS_INIT;
      cnt   <= '0;
    end else begin
      unique case (state)
        CS_INIT: if (k_word) begin
          cnt   <= CW'(1);
          state <= (NEED <= 1) ? CS_DATA : CS_CHECK;
        end
        CS_CHECK: if (!k_word) begin
          cnt   <= '0;
          state <= CS_INIT;
        end else begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) + 1 >= NEED) state <= CS_DATA;
        end
        CS_DATA: ;
        default: state <= CS_INIT;
      endcase
    end
  end

  assign cgs_done = (state == CS_DATA);
endmodule
