// tb_ecc_encoder: compares the encoder's ECB and ECB length with the reference
// SECDED model (code word built bit by bit, each check bit a parity over
// positions) for blocks of every compression class.
module tb_ecc_encoder;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  logic [CC_W-1:0]  cc;
  block_t           cb;
  logic [LEN_W-1:0] len, ecb_len;
  frame_t           ecb;
  int checks = 0, failures = 0;

  ecc_encoder dut (.cc, .cb, .len, .ecb, .ecb_len);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_a b, rcb;
    frm_a recb;
    int rcc, rlen;
    for (int kind = 0; kind <= 9; kind++) begin
      for (int n = 0; n < 100; n++) begin
        b = gen_block(kind);
        ref_compress(b, rcc, rcb);
        rlen = ref_ecc(rcc, rcb, recb);
        cc  = CC_W'(rcc);
        len = LEN_W'(ref_cb_len(rcc));
        for (int k = 0; k < 64; k++) cb[k] = rcb[k];
        #1;
        checks++;
        if (int'(ecb_len) != rlen) begin
          failures++;
          $display("cc %0d: ecb_len %0d expected %0d", rcc, ecb_len, rlen);
        end
        for (int k = 0; k < 66; k++) if (ecb[k] != recb[k]) begin
          failures++;
          if (failures < 10) $display("cc %0d: ecb byte %0d = %h expected %h", rcc, k, ecb[k], recb[k]);
          break;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
