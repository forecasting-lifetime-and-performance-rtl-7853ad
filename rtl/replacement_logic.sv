// replacement_logic: step 3 of the write path, victim selection.
//
// A frame can receive a block only if it has at least as many healthy bytes as
// the ECB is long. Among the frames of the set that qualify, an empty (invalid)
// frame is taken first, lowest way first; otherwise the least recently used,
// i.e. the one with the largest age. The victim's fault map is passed on to the
// index calculation. When no frame of the set is large enough the block is not
// allocated (`found` low).
//
// The paper gives the rule "the replacement algorithm selects the victim block
// from the subset of frames with the required minimum capacity", with the
// frames' capacity classes and replacement information as inputs. The capacity
// here is the exact count of healthy bytes, and the replacement information is
// an LRU age per way (0 = most recent, WAYS-1 = oldest); both are this design's
// choices.
//
// Interface: combinational.
module replacement_logic
  import nvllc_pkg::*;
#(
  parameter int unsigned WAYS = 16,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [LEN_W-1:0]             need_len,
  input  logic [WAYS-1:0][LEN_W-1:0]   frame_cap,
  input  logic [WAYS-1:0]              frame_valid,
  input  logic [WAYS-1:0][WW-1:0]      age,
  input  byte_mask_t [WAYS-1:0]        fault_maps,
  output logic                         found,
  output logic [WW-1:0]                victim,
  output byte_mask_t                   victim_fault_map
);

  logic [WAYS-1:0] eligible;

  always_comb begin
    logic          got_invalid;
    logic [WW-1:0] best_age;
    for (int w = 0; w < int'(WAYS); w++) eligible[w] = (frame_cap[w] >= need_len);
    found       = |eligible;
    victim      = '0;
    got_invalid = 1'b0;
    best_age    = '0;
    for (int w = 0; w < int'(WAYS); w++) begin
      if (eligible[w] && !frame_valid[w] && !got_invalid) begin
        got_invalid = 1'b1;
        victim      = WW'(w);
      end
    end
    if (!got_invalid) begin
      for (int w = 0; w < int'(WAYS); w++) begin
        if (eligible[w] && (age[w] >= best_age)) begin
          best_age = age[w];
          victim   = WW'(w);
        end
      end
    end
    victim_fault_map = fault_maps[victim];
  end

endmodule
