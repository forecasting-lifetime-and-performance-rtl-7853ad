// tb_ecc_decoder: feeds reference-encoded ECBs with no error, one flipped bit
// and two flipped bits. Expects: clean pass-through; correction with the
// faulty ECB byte reported; and detection of the double error.
module tb_ecc_decoder;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  logic [CC_W-1:0]  cc;
  frame_t           ecb;
  block_t           cb;
  logic [LEN_W-1:0] len;
  logic             corrected, uncorrectable, fault_in_frame;
  logic [POS_W-1:0] fault_byte;
  int checks = 0, failures = 0;

  ecc_decoder dut (.cc, .ecb, .cb, .len, .corrected, .uncorrectable, .fault_in_frame, .fault_byte);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_cb(blk_a rcb, int l, string what);
    checks++;
    for (int k = 0; k < 64; k++)
      if (cb[k] != ((k < l) ? rcb[k] : 8'h00)) begin
        failures++;
        if (failures < 10) $display("%s: cb byte %0d = %h expected %h", what, k, cb[k], rcb[k]);
        break;
      end
  endtask

  // number of meaningful bits in the ECB (unused high bits of a 2-byte check
  // field are not part of the code)
  function automatic int code_bits(int l, int el);
    return (el - l == 1) ? 8 * el : 8 * (l + 1) + 3;
  endfunction

  initial begin
    blk_a b, rcb;
    frm_a recb;
    int rcc, el, l, nb, b1, b2;
    for (int kind = 0; kind <= 9; kind++) begin
      for (int n = 0; n < 60; n++) begin
        b = gen_block(kind);
        ref_compress(b, rcc, rcb);
        el = ref_ecc(rcc, rcb, recb);
        l  = ref_cb_len(rcc);
        nb = code_bits(l, el);
        cc = CC_W'(rcc);
        // clean
        for (int k = 0; k < 66; k++) ecb[k] = recb[k];
        #1;
        checks++;
        if (corrected || uncorrectable || int'(len) != l) begin
          failures++; $display("clean cc %0d: flags %b%b len %0d", rcc, corrected, uncorrectable, len);
        end
        check_cb(rcb, l, "clean");
        // single error
        b1 = $urandom_range(nb - 1);
        ecb[b1 / 8][b1 % 8] = ~ecb[b1 / 8][b1 % 8];
        #1;
        checks++;
        if (!corrected || uncorrectable || !fault_in_frame || int'(fault_byte) != b1 / 8) begin
          failures++;
          if (failures < 10) $display("single cc %0d bit %0d: corr %b unc %b byte %0d", rcc, b1, corrected, uncorrectable, fault_byte);
        end
        check_cb(rcb, l, "single");
        // double error
        do b2 = $urandom_range(nb - 1); while (b2 == b1);
        ecb[b2 / 8][b2 % 8] = ~ecb[b2 / 8][b2 % 8];
        #1;
        checks++;
        if (corrected || !uncorrectable) begin
          failures++;
          if (failures < 10) $display("double cc %0d bits %0d %0d: corr %b unc %b", rcc, b1, b2, corrected, uncorrectable);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
