// tb_nvm_frame_array: random byte-masked writes and reads on a 64-frame array;
// read data must appear one clock after the request and match a model in
// which unmasked bytes keep their old value.
module tb_nvm_frame_array;
  import nvllc_pkg::*;

  localparam int F = 64;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr, rd_addr;
  byte_mask_t wr_be;
  frame_t wr_data, rd_data;
  frame_t model [F];
  int checks = 0, failures = 0;

  nvm_frame_array #(.FRAMES(F)) dut (.clk, .wr_en, .wr_addr, .wr_be, .wr_data,
                                     .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame_t expect_q;
    bit pending;
    // fill every frame completely first
    for (int a = 0; a < F; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_be = '1;
      for (int b = 0; b < 66; b++) wr_data[b] = 8'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    pending = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (pending) begin
        checks++;
        if (rd_data != expect_q) begin
          failures++;
          if (failures < 10) $display("read mismatch at cycle %0d", n);
        end
      end
      wr_en = ($urandom_range(1) == 1);
      rd_en = ($urandom_range(1) == 1);
      wr_addr = 6'($urandom_range(F - 1));
      rd_addr = 6'($urandom_range(F - 1));
      for (int b = 0; b < 66; b++) begin
        wr_be[b] = ($urandom_range(1) == 1);
        wr_data[b] = 8'($urandom);
      end
      // read returns the contents before this edge's write
      if (rd_en) expect_q = model[rd_addr];
      pending = rd_en;
      if (wr_en)
        for (int b = 0; b < 66; b++) if (wr_be[b]) model[wr_addr][b] = wr_data[b];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
