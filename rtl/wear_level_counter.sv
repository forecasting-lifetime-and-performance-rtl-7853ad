// wear_level_counter: the global intra-frame wear-leveling counter.
//
// Holds the byte position (0..FRAME_BYTES-1) at which the next block write
// starts inside its frame. It advances by one position, wrapping at the frame
// size, after every STEP_WRITES block writes, so that successive writes of
// short compressed blocks start at different bytes and wear the frame evenly.
// The paper gives the counter's role ("a global counter points out the initial
// write position of the block within the frame"); the step of one byte per
// write is this design's choice (STEP_WRITES = 1).
//
// Interface: `advance` is high for one cycle per block write; `pos` changes on
// the following clock edge. Reset to position 0.
module wear_level_counter
  import nvllc_pkg::*;
#(
  parameter int unsigned STEP_WRITES = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              advance,
  output logic [POS_W-1:0]  pos
);

  localparam int unsigned CW = (STEP_WRITES > 1) ? $clog2(STEP_WRITES) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0;
      cnt <= '0;
    end else if (advance) begin
      if (int'(cnt) == int'(STEP_WRITES) - 1) begin
        cnt <= '0;
        pos <= (int'(pos) == int'(FRAME_BYTES) - 1) ? '0 : pos + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
