// block_gather: read-side inverse of the crossbar.
//
// Rebuilds the ECB from a frame read out of the array, using the index vector
// and write-control bits that index_calc recomputes from the frame's fault
// map, stored start position and ECB length: ECB byte j is the frame byte p
// whose write-control bit is set and whose index is j. Bytes of the ECB beyond
// its length come out zero. The paper describes only the write direction; a
// cache must read its blocks back, and this is the matching gather network.
//
// Interface: combinational.
module block_gather
  import nvllc_pkg::*;
(
  input  frame_t      frame,
  input  index_vec_t  idx,
  input  byte_mask_t  wr_en,
  output frame_t      ecb
);

  for (genvar j = 0; j < int'(FRAME_BYTES); j++) begin : g_out
    always_comb begin
      ecb[j] = 8'h00;
      for (int p = 0; p < int'(FRAME_BYTES); p++)
        if (wr_en[p] && (idx[p] == POS_W'(j))) ecb[j] |= frame[p];
    end
  end

endmodule
