// tb_replacement_logic: random set states (capacities, valid bits, LRU ages as
// a permutation, fault maps) and ECB lengths; the victim must be the first
// empty frame with room, else the oldest frame with room, and none when no
// frame has room.
module tb_replacement_logic;
  import nvllc_pkg::*;

  localparam int W = 16;
  logic [LEN_W-1:0]         need_len;
  logic [W-1:0][LEN_W-1:0]  frame_cap;
  logic [W-1:0]             frame_valid;
  logic [W-1:0][3:0]        age;
  byte_mask_t [W-1:0]       fault_maps;
  logic                     found;
  logic [3:0]               victim;
  byte_mask_t               victim_fault_map;
  int checks = 0, failures = 0, n_inv = 0, n_lru = 0, n_none = 0;

  replacement_logic #(.WAYS(W)) dut (.need_len, .frame_cap, .frame_valid, .age,
                                     .fault_maps, .found, .victim, .victim_fault_map);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [W];
    int exp_v, best;
    bit exp_f;
    for (int n = 0; n < 3000; n++) begin
      foreach (perm[k]) perm[k] = k;
      perm.shuffle();
      for (int w = 0; w < W; w++) begin
        frame_cap[w]   = LEN_W'($urandom_range(30, 66));
        frame_valid[w] = ($urandom_range(7) != 0);
        age[w]         = 4'(perm[w]);
        fault_maps[w]  = {$urandom, $urandom, $urandom};
      end
      need_len = LEN_W'($urandom_range(1, 66));
      #1;
      exp_v = -1;
      for (int w = 0; w < W; w++)
        if (frame_cap[w] >= need_len && !frame_valid[w] && exp_v < 0) exp_v = w;
      if (exp_v >= 0) n_inv++;
      else begin
        best = -1;
        for (int w = 0; w < W; w++)
          if (frame_cap[w] >= need_len && perm[w] > best) begin best = perm[w]; exp_v = w; end
        if (exp_v >= 0) n_lru++; else n_none++;
      end
      exp_f = (exp_v >= 0);
      checks++;
      if (found != exp_f || (exp_f && (int'(victim) != exp_v || victim_fault_map != fault_maps[exp_v]))) begin
        failures++;
        if (failures < 10) $display("need %0d: found %b victim %0d, expected %b %0d", need_len, found, victim, exp_f, exp_v);
      end
    end
    checks++;
    if (n_inv == 0 || n_lru == 0 || n_none == 0) begin
      failures++; $display("cases not covered: %0d %0d %0d", n_inv, n_lru, n_none);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
