// crossbar: step 4 of the write path, rearranges the ECB into the frame image
// RECB.
//
// Each of the 66 frame byte positions has a 66-to-1 byte multiplexer driven by
// its entry of the index vector: recb[p] = ecb[idx[p]]. Positions whose
// write-control bit is low output zero; the frame array does not write them.
// The paper names a crossbar driven by the index vector; the multiplexer per
// output byte is the plain way to build one.
//
// Interface: combinational.
module crossbar
  import nvllc_pkg::*;
(
  input  frame_t      ecb,
  input  index_vec_t  idx,
  input  byte_mask_t  wr_en,
  output frame_t      recb
);

  always_comb begin
    for (int p = 0; p < int'(FRAME_BYTES); p++)
      recb[p] = wr_en[p] ? ecb[idx[p]] : 8'h00;
  end

endmodule
