// ecc_decoder: SECDED check and correction of a block read from a frame.
//
// Inverse of ecc_encoder. From the stored class CC (kept with the frame's
// metadata) it knows the CB length and where the one or two check bytes sit in
// the ECB; it recomputes the Hamming bits over {CB, CC}, forms the syndrome and
// the overall parity check and
//   - no error: passes CB through;
//   - odd parity (single error): flips the bit the syndrome points at and raises
//     `corrected`; the paper has such a corrected fault raise an operating
//     system exception, whose handler disables the faulty byte, so the byte of
//     the ECB that held the bit is reported in `fault_byte` (fault_in_frame is
//     low when the bit was one of the CC bits, which are not stored in the
//     frame);
//   - even parity with a non-zero syndrome, or a syndrome that points outside
//     the code word: raises `uncorrectable` (double error detected).
//
// Interface: combinational.
module ecc_decoder
  import nvllc_pkg::*;
(
  input  logic [CC_W-1:0]   cc,
  input  frame_t            ecb,
  output block_t            cb,            // corrected, bytes >= len zero
  output logic [LEN_W-1:0]  len,
  output logic              corrected,
  output logic              uncorrectable,
  output logic              fault_in_frame,
  output logic [POS_W-1:0]  fault_byte     // ECB byte index of the corrected bit
);

  logic                     two;
  block_t                   cb_raw;
  logic [1:0][7:0]          chk;
  logic [ECC_HAM_BITS-1:0]  h_rd, syn;
  logic                     par_rd, par_err;
  logic [ECC_DATA_BITS-1:0] data, data_fix;

  assign len = cb_len(cc);
  assign two = (ecc_len(len) == 2'd2);

  always_comb begin
    cb_raw = '0;
    chk = '0;
    for (int j = 0; j < int'(BLOCK_BYTES); j++)
      if (LEN_W'(j) < len) cb_raw[j] = ecb[j];
    for (int j = 0; j < int'(FRAME_BYTES); j++) begin
      if (LEN_W'(j) == len) chk[0] = ecb[j];
      if (two && (LEN_W'(j) == len + LEN_W'(1))) chk[1] = ecb[j];
    end
  end

  always_comb begin
    if (two) begin
      h_rd   = {chk[1][1:0], chk[0]};
      par_rd = chk[1][2];
    end else begin
      h_rd   = {3'b000, chk[0][6:0]};
      par_rd = chk[0][7];
    end
  end

  assign data    = {cb_raw, cc};
  assign syn     = ecc_hamming(data) ^ h_rd;
  assign par_err = (^data) ^ (^h_rd) ^ par_rd;

  always_comb begin
    logic hit;
    int   dbit;
    data_fix       = data;
    corrected      = 1'b0;
    uncorrectable  = 1'b0;
    fault_in_frame = 1'b0;
    fault_byte     = '0;
    hit            = 1'b0;
    dbit           = 0;
    if (par_err) begin
      corrected = 1'b1;
      if (syn == '0) begin
        // the overall parity bit itself
        fault_in_frame = 1'b1;
        fault_byte     = two ? len + POS_W'(1) : len;
      end else if ((syn & (syn - 1'b1)) == '0) begin
        // one of the Hamming check bits
        fault_in_frame = 1'b1;
        fault_byte     = (syn > ECC_HAM_BITS'(128)) ? len + POS_W'(1) : len;
        if (!two && syn >= ECC_HAM_BITS'(128)) begin
          corrected     = 1'b0;
          uncorrectable = 1'b1;
        end
      end else begin
        for (int k = 0; k < int'(ECC_DATA_BITS); k++)
          if (ECC_POS[k] == syn) begin
            hit  = 1'b1;
            dbit = k;
          end
        // a data bit beyond the CB cannot be in error: more than one fault
        if (!hit || (dbit >= int'(CC_W) + 8 * int'(len))) begin
          corrected     = 1'b0;
          uncorrectable = 1'b1;
        end else begin
          data_fix[dbit] = ~data[dbit];
          if (dbit >= int'(CC_W)) begin
            fault_in_frame = 1'b1;
            fault_byte     = POS_W'((dbit - int'(CC_W)) / 8);
          end
        end
      end
    end else if (syn != '0) begin
      uncorrectable = 1'b1;
    end
  end

  assign cb = data_fix[ECC_DATA_BITS-1:CC_W];

endmodule
