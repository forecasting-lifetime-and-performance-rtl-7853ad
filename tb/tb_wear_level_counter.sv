// tb_wear_level_counter: random advance pattern on two counters (one position
// per write, and one position per 3 writes); the position must equal
// (writes / step) mod 66 at every clock, and wrap past 65 at least once.
module tb_wear_level_counter;
  import nvllc_pkg::*;

  logic clk = 0, rst_n = 0, advance = 0;
  logic [POS_W-1:0] pos1, pos3;
  int checks = 0, failures = 0, writes = 0, wraps = 0;

  wear_level_counter dut1 (.clk, .rst_n, .advance, .pos(pos1));
  wear_level_counter #(.STEP_WRITES(3)) dut3 (.clk, .rst_n, .advance, .pos(pos3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [POS_W-1:0] last;
    repeat (2) @(posedge clk);
    rst_n = 1;
    last = '0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      checks++;
      if (int'(pos1) != writes % 66 || int'(pos3) != (writes / 3) % 66) begin
        failures++;
        if (failures < 10) $display("after %0d writes: pos %0d/%0d", writes, pos1, pos3);
      end
      if (pos1 < last) wraps++;
      last = pos1;
      advance = ($urandom_range(3) != 0);
      if (advance) writes++;
    end
    checks++;
    if (wraps == 0) begin failures++; $display("counter never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
