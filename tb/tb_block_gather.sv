// tb_block_gather: places a random ECB on a random degraded frame with the
// reference placement, fills the other bytes with junk, and checks that the
// gather network returns the ECB (zero beyond its length).
module tb_block_gather;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  frame_t     frame, ecb;
  index_vec_t idx;
  byte_mask_t wr_en;
  int checks = 0, failures = 0;

  block_gather dut (.frame, .idx, .wr_en, .ecb);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit fm [66];
    int pos [66];
    byte unsigned src [66];
    int l, st, healthy;
    for (int n = 0; n < 2000; n++) begin
      healthy = 0;
      for (int p = 0; p < 66; p++) begin
        fm[p] = ($urandom_range(99) < 20);
        if (!fm[p]) healthy++;
        frame[p] = 8'($urandom);
        src[p] = 8'($urandom);
      end
      l  = $urandom_range(1, healthy);
      st = $urandom_range(0, 65);
      ref_place(fm, st, l, pos);
      idx = '0;
      wr_en = '0;
      for (int j = 0; j < l; j++) begin
        frame[pos[j]] = src[j];
        idx[pos[j]] = POS_W'(j);
        wr_en[pos[j]] = 1'b1;
      end
      #1;
      checks++;
      for (int j = 0; j < 66; j++)
        if (ecb[j] != ((j < l) ? src[j] : 8'h00)) begin
          failures++;
          if (failures < 10) $display("ECB byte %0d: %h expected %h", j, ecb[j], (j < l) ? src[j] : 8'h00);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
