// tb_fault_map_array: clears every set, then disables random bytes and reads
// random sets, comparing with a model; a later clear must empty a set again.
module tb_fault_map_array;
  import nvllc_pkg::*;

  localparam int S = 16, W = 4;
  logic clk = 0;
  logic [3:0] rd_set, dis_set, clr_set;
  byte_mask_t [W-1:0] rd_maps;
  logic dis_en = 0, clr_en = 0;
  logic [1:0] dis_way;
  logic [POS_W-1:0] dis_byte;
  byte_mask_t [W-1:0] model [S];
  int checks = 0, failures = 0;

  fault_map_array #(.SETS(S), .WAYS(W)) dut (.clk, .rd_set, .rd_maps, .dis_en, .dis_set,
                                              .dis_way, .dis_byte, .clr_en, .clr_set);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < S; s++) begin
      @(negedge clk); clr_en = 1; clr_set = 4'(s); model[s] = '0;
    end
    @(negedge clk); clr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check the read of the previous cycle's state
      rd_set = 4'($urandom_range(S - 1));
      #1;
      checks++;
      if (rd_maps != model[rd_set]) begin
        failures++;
        if (failures < 10) $display("set %0d read mismatch", rd_set);
      end
      dis_en = ($urandom_range(1) == 1);
      clr_en = ($urandom_range(63) == 0);
      dis_set = 4'($urandom_range(S - 1));
      dis_way = 2'($urandom_range(W - 1));
      dis_byte = POS_W'($urandom_range(65));
      clr_set = 4'($urandom_range(S - 1));
      @(posedge clk);
      if (clr_en) model[clr_set] = '0;
      else if (dis_en) model[dis_set][dis_way][dis_byte] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
