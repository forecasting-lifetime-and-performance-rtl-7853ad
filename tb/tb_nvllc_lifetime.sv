// tb_nvllc_lifetime: ages a small cache (4 sets x 4 ways) until half of its
// bytes are disabled, the end point of the published lifetime evaluation.
//
// Phase 1 (wear leveling): with no failures, a stream of mixed compressed and
// raw blocks is written. The writes each frame byte position receives, summed
// over the cache, must be even: the most written position may see at most 25 %
// more writes than the least written one.
//
// Phase 2 (aging): every byte gets an endurance drawn from a normal
// distribution (mean ENDURANCE, sigma 0.2 * mean, the published shape scaled
// down from 1e11 writes). The testbench counts the writes of every byte; a byte
// written past its endurance stores one wrong bit from then on. Each write is
// read back at once, so a failed byte shows up as a corrected single fault
// (checked: exception on exactly that byte, data intact), or - when two bytes
// of a block die on the same write - as a detected double fault. The handler
// role is played here: each failed byte is disabled. Capacity is reported at
// every 10 % of lost bytes, along with the share of writes that could still be
// allocated. The run must reach 50 % lost capacity and must keep allocating
// compressed blocks after raw blocks no longer fit any frame.
module tb_nvllc_lifetime;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  localparam int SETS = 4, WAYS = 4, SW = 2, WW = 2;
  localparam int FR = SETS * WAYS;
  localparam int ENDURANCE = 150;
  localparam int MAX_WRITES = 60000;

  logic clk = 0, rst_n = 0;
  logic init_done;
  logic wr_valid = 0, wr_ready;
  logic [SW-1:0] wr_set = '0;
  block_t wr_block = '0;
  logic wr_resp_valid, wr_resp_alloc;
  logic [WW-1:0] wr_resp_way;
  logic [CC_W-1:0] wr_resp_cc;
  logic [LEN_W-1:0] wr_resp_ecb_len;
  logic rd_valid = 0, rd_ready;
  logic [SW-1:0] rd_set = '0;
  logic [WW-1:0] rd_way = '0;
  logic rd_resp_valid, rd_resp_hit, rd_resp_corrected, rd_resp_uncorrectable;
  block_t rd_resp_block;
  logic [CC_W-1:0] rd_resp_cc;
  logic exc_valid;
  logic [SW-1:0] exc_set;
  logic [WW-1:0] exc_way;
  logic [POS_W-1:0] exc_byte;
  logic dis_valid = 0, dis_ready;
  logic [SW-1:0] dis_set = '0;
  logic [WW-1:0] dis_way = '0;
  logic [POS_W-1:0] dis_byte = '0;

  nvllc_top #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int wcount [FR][66];
  int endur [FR][66];
  bit dead [FR][66];
  bit disabled [FR][66];
  int pos_writes [66];
  int n_disabled = 0, n_single = 0, n_double = 0, n_alloc = 0, n_writes = 0;
  int n_small_after_raw_lost = 0;
  bit raw_lost = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t: %s", $time, msg);
  endtask

  // approximately normal: sum of twelve uniforms
  function automatic int draw_endurance();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(1000000)) / 1000000.0;
    s = real'(ENDURANCE) * (1.0 + 0.2 * (s - 6.0));
    return (s < 1.0) ? 1 : int'(s);
  endfunction

  function automatic blk_a pick_block();
    int r = $urandom_range(99);
    if (r < 30) return gen_block(9);              // raw
    if (r < 40) return gen_block(0);
    if (r < 55) return gen_block(1);
    if (r < 65) return gen_block(8);
    return gen_block($urandom_range(2, 7));
  endfunction

  task automatic disable_byte(int f, int p);
    @(negedge clk);
    dis_valid = 1;
    dis_set = SW'(f / WAYS);
    dis_way = WW'(f % WAYS);
    dis_byte = POS_W'(p);
    @(negedge clk);
    dis_valid = 0;
    disabled[f][p] = 1;
    n_disabled++;
  endtask

  task automatic write_and_check(bit aging);
    blk_a b;
    int s, f, nd, first_dead;
    byte_mask_t be;
    logic alloc;
    int dead_now [$];
    b = pick_block();
    s = $urandom_range(SETS - 1);
    @(negedge clk);
    wr_valid = 1;
    wr_set = SW'(s);
    for (int k = 0; k < 64; k++) wr_block[k] = b[k];
    #1;
    alloc = dut.w_alloc;
    be = dut.w_be;
    f = s * WAYS + int'(dut.w_victim);
    @(negedge clk);
    wr_valid = 0;
    n_writes++;
    checks++;
    if (wr_resp_alloc != alloc) fail("write response disagrees with allocation");
    if (!alloc) return;
    n_alloc++;
    if (raw_lost && wr_resp_ecb_len < 66) n_small_after_raw_lost++;
    for (int p = 0; p < 66; p++) if (be[p]) begin
      checks++;
      if (disabled[f][p]) fail($sformatf("disabled byte %0d of frame %0d written", p, f));
      wcount[f][p]++;
      if (!aging) pos_writes[p]++;
      if (aging && wcount[f][p] >= endur[f][p]) dead[f][p] = 1;
      if (dead[f][p]) begin
        // the cell fails to store the written value
        dut.u_data.mem[f][p][0] = ~dut.u_data.mem[f][p][0];
        dead_now.push_back(p);
      end
    end
    // read the block back at once
    @(negedge clk);
    rd_valid = 1;
    rd_set = SW'(s);
    rd_way = WW'(f % WAYS);
    @(negedge clk);
    rd_valid = 0;
    nd = dead_now.size();
    checks++;
    if (!rd_resp_valid || !rd_resp_hit) fail("written frame not valid on read");
    if (nd == 0) begin
      if (rd_resp_corrected || rd_resp_uncorrectable) fail("error flagged on a clean frame");
    end else if (nd == 1) begin
      n_single++;
      if (!rd_resp_corrected || !exc_valid || int'(exc_byte) != dead_now[0])
        fail($sformatf("single fault at byte %0d: corr %b exc %b byte %0d", dead_now[0], rd_resp_corrected, exc_valid, exc_byte));
    end else if (nd == 2) begin
      n_double++;
      if (!rd_resp_uncorrectable) fail("double fault not detected");
    end
    if (nd <= 1) begin
      checks++;
      for (int k = 0; k < 64; k++) if (rd_resp_block[k] != b[k]) begin
        fail($sformatf("read data byte %0d wrong (faults %0d)", k, nd));
        break;
      end
    end
    foreach (dead_now[i]) disable_byte(f, dead_now[i]);
  endtask

  function automatic bit raw_fits_anywhere();
    for (int f = 0; f < FR; f++) begin
      int c = 0;
      for (int p = 0; p < 66; p++) if (!disabled[f][p]) c++;
      if (c == 66) return 1;
    end
    return 0;
  endfunction

  initial begin
    int mx, mn, step, lost_pct, last_alloc, last_writes;
    for (int f = 0; f < FR; f++)
      for (int p = 0; p < 66; p++) begin
        wcount[f][p] = 0; dead[f][p] = 0; disabled[f][p] = 0;
        endur[f][p] = draw_endurance();
      end
    foreach (pos_writes[p]) pos_writes[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);

    // phase 1: wear leveling inside frames
    for (int i = 0; i < 3000; i++) write_and_check(0);
    mx = 0; mn = 1 << 30;
    foreach (pos_writes[p]) begin
      if (pos_writes[p] > mx) mx = pos_writes[p];
      if (pos_writes[p] < mn) mn = pos_writes[p];
    end
    $display("phase 1: writes per byte position min %0d max %0d", mn, mx);
    checks++;
    if (mx * 100 > mn * 125) fail("intra-frame wear is not even");

    // phase 2: aging until half of the bytes are disabled
    for (int f = 0; f < FR; f++) for (int p = 0; p < 66; p++) wcount[f][p] = 0;
    step = 1;
    last_alloc = n_alloc; last_writes = n_writes;
    while (n_disabled * 2 < FR * 66 && n_writes < MAX_WRITES) begin
      write_and_check(1);
      if (!raw_lost && !raw_fits_anywhere()) begin
        raw_lost = 1;
        $display("after %0d writes no frame can hold a raw block any more", n_writes);
      end
      lost_pct = n_disabled * 100 / (FR * 66);
      if (lost_pct >= 10 * step) begin
        $display("capacity %0d%% after %0d writes; allocated %0d of the last %0d writes",
                 100 - lost_pct, n_writes, n_alloc - last_alloc, n_writes - last_writes);
        last_alloc = n_alloc; last_writes = n_writes;
        step++;
      end
    end
    $display("single faults %0d, double faults %0d, bytes disabled %0d of %0d",
             n_single, n_double, n_disabled, FR * 66);
    checks++;
    if (n_disabled * 2 < FR * 66) fail("did not reach 50% capacity");
    checks++;
    if (n_single == 0) fail("no single fault corrected");
    checks++;
    if (!raw_lost || n_small_after_raw_lost == 0)
      fail("no compressed block allocated after raw blocks stopped fitting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
