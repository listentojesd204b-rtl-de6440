// elastic_buffer: per-lane circular FIFO that removes lane-to-lane skew.
//
// Every lane starts writing at its own first ILAS word (wr_start) and then
// writes one word per clock. `ready` rises once the first word is stored.
// The link's buffer_release block raises `release_i` for all lanes in the
// same cycle, at an LMFC boundary after every lane is ready; from then on
// each lane reads one word per clock starting at address 0. Since all lanes
// began writing with the same ILAS word, the words read in one cycle belong
// together, whatever skew the lanes had. The occupancy at release, at most
// one multiframe plus the skew, must stay below DEPTH; if the write pointer
// catches up with the read pointer before release, `overflow` is set and
// stays set until `restart`.
// Each entry is WIDTH bits (data plus a user-data flag). Timing: rd_* are
// registered and valid one cycle after release_i first is high.
// Circular FIFOs released together at an LMFC boundary follow the paper;
// the write start at /R/ and the DEPTH default are this design's choices.
module elastic_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 33
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             restart,
  input  logic             wr_start,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             release_i,
  output logic             ready,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid,
  output logic             overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             writing, wr_en;
  logic [AW:0]      level;

  assign wr_en = writing || wr_start;
  assign level = wptr - rptr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      writing  <= 1'b0;
      ready    <= 1'b0;
      wptr     <= '0;
      rptr     <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_en) begin
        writing <= 1'b1;
        ready   <= 1'b1;
        wptr    <= wptr + 1'b1;
        if (!release_i && 32'(level) >= DEPTH) overflow <= 1'b1;
      end
      if (release_i) begin
        rd_data  <= mem[rptr[AW-1:0]];
        rptr     <= rptr + 1'b1;
        rd_valid <= 1'b1;
      end
    end
  end

  // A release must never find the lane empty.
  a_release_ready: assert property (@(posedge clk) disable iff (rst || restart)
    release_i |-> ready);
endmodule
