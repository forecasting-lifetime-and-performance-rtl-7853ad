// index_calc: step 4 of the write path, the index vector and write-control
// bits that place an ECB on the healthy bytes of its victim frame.
//
// Inputs are the victim frame's fault map (one bit per frame byte, 1 = byte
// disabled), the ECB length and the initial write position given by the global
// wear-leveling counter. Walking the frame circularly from that position, the
// n-th healthy byte receives ECB byte n, for n below the ECB length: idx[p] is
// the ECB byte that frame byte p receives and wr_en[p] says that p is written
// at all (the write-control bits). Bytes not written keep their old contents,
// so a short ECB wears only the bytes it lands on, and the moving start spreads
// those bytes over the whole frame. A faulty start byte is skipped.
//
// The paper gives the function (fault map, wear-leveling position -> index
// vector and write-control bits); the circular walk from the start position is
// this design's reading of "a global counter points out the initial write
// position of the block within the frame". The same block is used on the read
// side to find where each ECB byte was put.
//
// Interface: combinational. `capacity` is the number of healthy bytes and
// `fits` says the ECB fits in them.
module index_calc
  import nvllc_pkg::*;
(
  input  byte_mask_t        fault_map,
  input  logic [POS_W-1:0]  start,       // 0 .. FRAME_BYTES-1
  input  logic [LEN_W-1:0]  len,         // ECB length
  output index_vec_t        idx,
  output byte_mask_t        wr_en,
  output logic [LEN_W-1:0]  capacity,
  output logic              fits
);

  always_comb begin
    logic [LEN_W-1:0] rank;
    int p;
    idx   = '0;
    wr_en = '0;
    rank  = '0;
    for (int o = 0; o < int'(FRAME_BYTES); o++) begin
      p = int'(start) + o;
      if (p >= int'(FRAME_BYTES)) p -= int'(FRAME_BYTES);
      if (!fault_map[p]) begin
        idx[p]   = rank;
        wr_en[p] = (rank < len);
        rank     = rank + 1'b1;
      end
    end
    capacity = rank;
  end

  assign fits = (capacity >= len);

endmodule
