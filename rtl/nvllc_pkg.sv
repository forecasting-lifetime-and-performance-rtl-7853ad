// nvllc_pkg: types and constants shared by the compressed NV last-level cache
// write/read datapath.
//
// A cache block is 64 bytes. It is compressed with a Base-Delta-Immediate (BDI)
// family of encodings into a compressed block (CB, 0..64 bytes), SECDED check
// bytes are appended to give the ECC-protected block (ECB, 1..66 bytes), and the
// ECB is spread over the healthy bytes of a 66-byte frame. The byte counts 64,
// 66 and the 4-bit compression class follow the write-path figure of the paper;
// the exact list of encodings and their byte layout are this design's choices
// (see the compressor and the README).
package nvllc_pkg;

  localparam int unsigned BLOCK_BYTES = 64;             // uncompressed block B
  localparam int unsigned ECC_MAX_BYTES = 2;            // 66 - 64
  localparam int unsigned FRAME_BYTES = BLOCK_BYTES + ECC_MAX_BYTES;  // 66
  localparam int unsigned LEN_W = 7;                    // holds 0..66
  localparam int unsigned POS_W = 7;                    // byte position 0..65
  localparam int unsigned CC_W = 4;                     // compression class

  // SECDED over {CB, CC}: 4 + 512 data bits, 10 Hamming bits + overall parity.
  localparam int unsigned ECC_DATA_BITS = CC_W + 8 * BLOCK_BYTES;  // 516
  localparam int unsigned ECC_HAM_BITS = 10;
  // Data bits that still fit a 7-check-bit Hamming code (positions < 128).
  localparam int unsigned ECC_SHORT_DATA_BITS = 120;

  // Compression classes. B8Dd: one 8-byte base (the first word) plus d-byte
  // deltas for the other seven words. B4D1: one 4-byte base plus 1-byte deltas
  // for the other fifteen words.
  typedef enum logic [CC_W-1:0] {
    CC_ZERO = 4'd0,
    CC_B8D1 = 4'd1,
    CC_B8D2 = 4'd2,
    CC_B8D3 = 4'd3,
    CC_B8D4 = 4'd4,
    CC_B8D5 = 4'd5,
    CC_B8D6 = 4'd6,
    CC_B8D7 = 4'd7,
    CC_B4D1 = 4'd8,
    CC_UNCOMP = 4'd15
  } cc_e;

  typedef logic [BLOCK_BYTES-1:0][7:0] block_t;   // byte 0 is the least significant
  typedef logic [FRAME_BYTES-1:0][7:0] frame_t;
  typedef logic [FRAME_BYTES-1:0] byte_mask_t;     // one bit per frame byte
  typedef logic [FRAME_BYTES-1:0][POS_W-1:0] index_vec_t;

  // Size in bytes of the compressed block of each class.
  function automatic logic [LEN_W-1:0] cb_len(input logic [CC_W-1:0] cc);
    unique case (cc)
      CC_ZERO: return LEN_W'(0);
      CC_B8D1, CC_B8D2, CC_B8D3, CC_B8D4, CC_B8D5, CC_B8D6, CC_B8D7:
        return LEN_W'(8 + 7 * int'(cc));
      CC_B4D1: return LEN_W'(4 + 15);
      default: return LEN_W'(BLOCK_BYTES);
    endcase
  endfunction

  // SECDED check bytes needed for a CB of the given length: one byte while
  // the data (CC plus CB) fit a 7-bit Hamming code, two bytes otherwise.
  function automatic logic [1:0] ecc_len(input logic [LEN_W-1:0] len);
    return (CC_W + 8 * int'(len) <= ECC_SHORT_DATA_BITS) ? 2'd1 : 2'd2;
  endfunction

  // Hamming position (1-based, powers of two skipped) of each SECDED data
  // bit. Data bit 0..3 is CC, data bit 4+8*j+b is bit b of CB byte j.
  typedef logic [ECC_DATA_BITS-1:0][ECC_HAM_BITS-1:0] ecc_pos_t;

  function automatic ecc_pos_t ecc_positions();
    ecc_pos_t t;
    int p;
    p = 0;
    for (int k = 0; k < int'(ECC_DATA_BITS); k++) begin
      p++;
      while ((p & (p - 1)) == 0) p++;   // skip 1, 2, 4, ...
      t[k] = ECC_HAM_BITS'(p);
    end
    return t;
  endfunction

  localparam ecc_pos_t ECC_POS = ecc_positions();

  // Hamming check bits: XOR of the positions of all set data bits.
  function automatic logic [ECC_HAM_BITS-1:0] ecc_hamming(
      input logic [ECC_DATA_BITS-1:0] d);
    logic [ECC_HAM_BITS-1:0] c;
    c = '0;
    for (int k = 0; k < int'(ECC_DATA_BITS); k++)
      if (d[k]) c ^= ECC_POS[k];
    return c;
  endfunction

endpackage
