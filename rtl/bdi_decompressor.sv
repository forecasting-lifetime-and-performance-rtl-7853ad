// bdi_decompressor: rebuilds the 64-byte block from its compression class and
// compressed block CB (read side of step 1).
//
// Inverse of bdi_compressor: class ZERO gives an all-zero block; B8Dd adds each
// sign-extended d-byte delta to the 8-byte base (word 0 is the base itself);
// B4D1 does the same with a 4-byte base and 1-byte deltas; UNCOMP copies CB.
// Every word is one adder, so the whole block is rebuilt in parallel, the low
// decompression latency the paper asks of the compression scheme. Class codes
// without an encoding (9..14) are treated as uncompressed.
//
// Interface: combinational.
module bdi_decompressor
  import nvllc_pkg::*;
(
  input  logic [CC_W-1:0]  cc,
  input  block_t           cb,
  output block_t           blk
);

  always_comb begin
    logic [63:0] base8, dlt8;
    logic [31:0] base4;
    int d;
    blk   = cb;
    dlt8  = '0;
    base8 = cb[7:0];
    base4 = cb[3:0];
    d     = int'(cc);
    unique case (cc)
      CC_ZERO: blk = '0;
      CC_B4D1: begin
        blk[3:0] = cb[3:0];
        for (int i = 1; i < 16; i++)
          blk[4*i +: 4] = base4 + {{24{cb[4 + i - 1][7]}}, cb[4 + i - 1]};
      end
      CC_B8D1, CC_B8D2, CC_B8D3, CC_B8D4, CC_B8D5, CC_B8D6, CC_B8D7: begin
        blk[7:0] = cb[7:0];
        for (int i = 1; i < 8; i++) begin
          dlt8 = '0;
          for (int b = 0; b < 7; b++)
            if (b < d) dlt8[8*b +: 8] = cb[8 + (i - 1) * d + b];
          // sign-extend from bit 8*d-1
          dlt8 = 64'($signed(dlt8 << (64 - 8 * d)) >>> (64 - 8 * d));
          blk[8*i +: 8] = base8 + dlt8;
        end
      end
      default: blk = cb;
    endcase
  end

endmodule
