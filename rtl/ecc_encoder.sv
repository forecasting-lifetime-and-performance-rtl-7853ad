// ecc_encoder: step 2 of the write path, SECDED check bytes for a compressed
// block.
//
// The paper protects each stored block with a SECDED code (single-error
// correct, double-error detect) computed on the compressed block CB, and the
// write-path figure gives the protected block ECB a size of 1..66 bytes for a
// CB of 0..64 bytes, i.e. one or two check bytes. This design meets those
// numbers with one extended Hamming code whose data word is the 4-bit class CC
// followed by the CB bits, zero-padded to 516 bits: 10 Hamming bits plus an
// overall parity bit, 11 bits in two bytes. When CC plus CB fit in 120 data
// bits (CB of at most 14 bytes, here only the all-zero class) the upper three
// Hamming bits are always zero, so the code shortens to 7 + 1 bits in a single
// byte. Covering CC follows the published block diagram, where both the class
// and the CB enter the ECC logic; it is also what makes a 0-byte CB carry one
// check byte, as the published ECB range of 1..66 bytes requires.
//
// Layout of the ECB: bytes 0..len-1 are CB, then the check bytes.
//   one byte : {parity, h[6:0]}
//   two bytes: byte len = h[7:0], byte len+1 = {5'b0, parity, h[9:8]}
//
// Interface: combinational.
module ecc_encoder
  import nvllc_pkg::*;
(
  input  logic [CC_W-1:0]   cc,
  input  block_t            cb,        // bytes at and above len must be zero
  input  logic [LEN_W-1:0]  len,       // CB length in bytes
  output frame_t            ecb,
  output logic [LEN_W-1:0]  ecb_len
);

  logic [ECC_DATA_BITS-1:0] data;
  logic [ECC_HAM_BITS-1:0]  h;
  logic                     par;
  logic                     two;
  logic [1:0][7:0]          chk;

  assign data = {cb, cc};
  assign h    = ecc_hamming(data);
  assign par  = (^data) ^ (^h);
  assign two  = (ecc_len(len) == 2'd2);
  assign chk  = two ? {5'b0, par, h[9:8], h[7:0]} : {8'h00, par, h[6:0]};
  assign ecb_len = len + LEN_W'(ecc_len(len));

  always_comb begin
    ecb = '0;
    for (int j = 0; j < int'(BLOCK_BYTES); j++)
      if (LEN_W'(j) < len) ecb[j] = cb[j];
    for (int j = 0; j < int'(FRAME_BYTES); j++) begin
      if (LEN_W'(j) == len) ecb[j] = chk[0];
      if (two && (LEN_W'(j) == len + LEN_W'(1))) ecb[j] = chk[1];
    end
  end

endmodule
