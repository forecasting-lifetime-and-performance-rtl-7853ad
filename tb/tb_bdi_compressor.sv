// tb_bdi_compressor: compares the compressor's class, CB length and CB image
// with the reference model for blocks of every class (zero, B8D1..B8D7, B4D1,
// random), 300 of each.
module tb_bdi_compressor;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  block_t           blk, cb;
  logic [CC_W-1:0]  cc;
  logic [LEN_W-1:0] len;
  int checks = 0, failures = 0;
  int seen [16];

  bdi_compressor dut (.blk, .cc, .cb, .len);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_a b, rcb;
    int rcc;
    foreach (seen[k]) seen[k] = 0;
    for (int kind = 0; kind <= 9; kind++) begin
      for (int n = 0; n < 300; n++) begin
        b = gen_block(kind);
        for (int k = 0; k < 64; k++) blk[k] = b[k];
        #1;
        ref_compress(b, rcc, rcb);
        checks++;
        if (int'(cc) != rcc || int'(len) != ref_cb_len(rcc)) begin
          failures++;
          if (failures < 10) $display("kind %0d: cc %0d len %0d, expected cc %0d", kind, cc, len, rcc);
        end
        for (int k = 0; k < 64; k++) if (cb[k] != rcb[k]) begin
          failures++;
          if (failures < 10) $display("kind %0d: cb byte %0d %h expected %h", kind, k, cb[k], rcb[k]);
          break;
        end
        seen[rcc]++;
      end
    end
    // every class must have been produced
    foreach (seen[k]) if (k <= 8 || k == 15) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("class %0d never produced", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
