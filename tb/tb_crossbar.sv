// tb_crossbar: random ECBs, index vectors and write-control bits; every output
// byte must be the indexed ECB byte, or zero where not written.
module tb_crossbar;
  import nvllc_pkg::*;

  frame_t     ecb, recb;
  index_vec_t idx;
  byte_mask_t wr_en;
  int checks = 0, failures = 0;

  crossbar dut (.ecb, .idx, .wr_en, .recb);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned src [66];
    int ix [66];
    bit en [66];
    for (int n = 0; n < 2000; n++) begin
      for (int p = 0; p < 66; p++) begin
        src[p] = 8'($urandom);
        ix[p]  = $urandom_range(0, 65);
        en[p]  = ($urandom_range(3) != 0);
        ecb[p] = src[p];
        idx[p] = POS_W'(ix[p]);
        wr_en[p] = en[p];
      end
      #1;
      checks++;
      for (int p = 0; p < 66; p++)
        if (recb[p] != (en[p] ? src[ix[p]] : 8'h00)) begin
          failures++;
          if (failures < 10) $display("byte %0d: %h expected %h", p, recb[p], en[p] ? src[ix[p]] : 8'h00);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
