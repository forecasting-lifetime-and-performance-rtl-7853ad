// bdi_compressor: step 1 of the write path, Base-Delta-Immediate compression.
//
// The 64-byte block B is offered in parallel to a bank of compressors and to an
// uncompressed path; a selector keeps the smallest encoding that is feasible and
// outputs its 4-bit compression class (CC) and the compressed block CB
// (0..64 bytes, unused bytes zero). The compressors named in the paper's write
// path figure are B8D1..B8D7 (8-byte base, 1..7-byte deltas) and B4D1 (4-byte
// base, 1-byte deltas), next to an uncompressed path; the figure also gives CB
// a size of 0..64 bytes, so an all-zero block is coded with 0 bytes.
//
// Design choices not fixed by the paper: the base is the first word of the
// block and its own (zero) delta is not stored, so B8Dd takes 8 + 7*d bytes and
// B4D1 takes 4 + 15 bytes; deltas are two's-complement differences to the base,
// stored little-endian in word order after the base.
//
// Interface: purely combinational, blk in, cc/cb/len out in the same cycle.
module bdi_compressor
  import nvllc_pkg::*;
(
  input  block_t              blk,
  output logic [CC_W-1:0]     cc,
  output block_t              cb,
  output logic [LEN_W-1:0]    len
);

  logic [7:0][63:0]  w8;
  logic [15:0][31:0] w4;
  logic [7:1][63:0]  d8;         // word i minus the base word 0
  logic [15:1][31:0] d4;
  logic [7:1]        fits8;      // fits8[d]: every 8-byte delta fits d signed bytes
  logic              fits4;
  logic              is_zero;

  always_comb begin
    for (int i = 0; i < 8; i++) w8[i] = blk[8*i +: 8];
    for (int i = 0; i < 16; i++) w4[i] = blk[4*i +: 4];
    for (int i = 1; i < 8; i++) d8[i] = w8[i] - w8[0];
    for (int i = 1; i < 16; i++) d4[i] = w4[i] - w4[0];
  end

  // A delta fits d bytes when all bits from 8*d-1 upward equal the sign bit.
  function automatic logic fits_signed64(input logic [63:0] v, input int d);
    logic [63:0] hi;
    hi = v >> (8 * d - 1);
    return (hi == '0) || (hi == ({64{1'b1}} >> (8 * d - 1)));
  endfunction

  always_comb begin
    is_zero = (blk == '0);
    for (int d = 1; d <= 7; d++) begin
      fits8[d] = 1'b1;
      for (int i = 1; i < 8; i++) begin
        if (!fits_signed64(d8[i], d)) fits8[d] = 1'b0;
      end
    end
    fits4 = 1'b1;
    for (int i = 1; i < 16; i++) begin
      if (!((d4[i][31:7] == '0) || (d4[i][31:7] == '1))) fits4 = 1'b0;
    end
  end

  // Selector: classes in order of increasing CB size.
  always_comb begin
    if (is_zero)        cc = CC_ZERO;
    else if (fits8[1])  cc = CC_B8D1;   // 15 bytes
    else if (fits4)     cc = CC_B4D1;   // 19 bytes
    else if (fits8[2])  cc = CC_B8D2;   // 22
    else if (fits8[3])  cc = CC_B8D3;   // 29
    else if (fits8[4])  cc = CC_B8D4;   // 36
    else if (fits8[5])  cc = CC_B8D5;   // 43
    else if (fits8[6])  cc = CC_B8D6;   // 50
    else if (fits8[7])  cc = CC_B8D7;   // 57
    else                cc = CC_UNCOMP; // 64
  end

  assign len = cb_len(cc);

  // Packing of the selected class.
  always_comb begin
    int d;
    cb = '0;
    d = int'(cc);
    unique case (cc)
      CC_ZERO: cb = '0;
      CC_B4D1: begin
        cb[3:0] = blk[3:0];
        for (int i = 1; i < 16; i++) begin
          cb[4 + i - 1] = d4[i][7:0];
        end
      end
      CC_B8D1, CC_B8D2, CC_B8D3, CC_B8D4, CC_B8D5, CC_B8D6, CC_B8D7: begin
        cb[7:0] = blk[7:0];
        for (int i = 1; i < 8; i++) begin
          for (int b = 0; b < 7; b++)
            if (b < d) cb[8 + (i - 1) * d + b] = d8[i][8*b +: 8];
        end
      end
      default: cb = blk;
    endcase
  end

endmodule
