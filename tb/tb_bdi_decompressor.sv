// tb_bdi_decompressor: compresses blocks of every class with the reference
// model and checks that the decompressor returns the original block.
module tb_bdi_decompressor;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  logic [CC_W-1:0] cc;
  block_t          cb, blk;
  int checks = 0, failures = 0;

  bdi_decompressor dut (.cc, .cb, .blk);

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
    for (int kind = 0; kind <= 9; kind++) begin
      for (int n = 0; n < 300; n++) begin
        b = gen_block(kind);
        ref_compress(b, rcc, rcb);
        cc = CC_W'(rcc);
        for (int k = 0; k < 64; k++) cb[k] = rcb[k];
        #1;
        checks++;
        for (int k = 0; k < 64; k++) if (blk[k] != b[k]) begin
          failures++;
          if (failures < 10) $display("cc %0d: byte %0d = %h expected %h", rcc, k, blk[k], b[k]);
          break;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
