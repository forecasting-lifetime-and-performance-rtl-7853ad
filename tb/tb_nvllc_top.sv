// tb_nvllc_top: end-to-end test of the cache data path at its default size
// (4096 sets x 16 ways of 66-byte frames).
//
// A model of the set state (valid bits, LRU ages, fault maps, stored blocks)
// and of the wear-leveling position predicts, for every write, the class, ECB
// length, whether and where the block is allocated; the frame image in the
// array is checked byte by byte against the reference placement of the
// reference ECB. Every read must return the stored block. The test then injects
// single-bit faults into stored bytes (expects correction, an exception naming
// the physical byte, and - after the byte is disabled - a smaller frame that
// still receives compressed blocks), a double fault (expects detection),
// degrades a whole set until an uncompressed block no longer fits (expects no
// allocation), and issues a write and a read together (expects the read to
// wait). Each of these mechanisms is counted and must occur.
module tb_nvllc_top;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  localparam int SETS = 4096, WAYS = 16, SW = 12, WW = 4;
  localparam int NTS = 8;     // sets used by the test

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

  nvllc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_class [16];
  int n_inv_fill = 0, n_lru_evict = 0, n_no_room = 0, n_degraded_use = 0;
  int n_corrected = 0, n_exc = 0, n_disabled = 0, n_uncorr = 0, n_wl_wrap = 0;
  int n_rd_stall = 0;

  // model
  bit   m_valid [NTS][WAYS];
  int   m_age   [NTS][WAYS];
  bit   m_fm    [NTS][WAYS][66];
  blk_a m_blk   [NTS][WAYS];
  int   m_cc    [NTS][WAYS];
  int   wl = 0;

  function automatic int set_of(int ts);
    return (ts * 613 + 5) % SETS;
  endfunction

  function automatic int cap_of(int ts, int w);
    int c = 66;
    for (int p = 0; p < 66; p++) if (m_fm[ts][w][p]) c--;
    return c;
  endfunction

  function automatic void touch(int ts, int way);
    int a = m_age[ts][way];
    for (int w = 0; w < WAYS; w++) if (m_age[ts][w] < a) m_age[ts][w]++;
    m_age[ts][way] = 0;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t: %s", $time, msg);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_write(int ts, blk_a b);
    int rcc, el, exp_w, best, st;
    blk_a rcb;
    frm_a recb;
    int pos [66];
    frame_t img;
    ref_compress(b, rcc, rcb);
    el = ref_ecc(rcc, rcb, recb);
    exp_w = -1;
    for (int w = 0; w < WAYS; w++)
      if (cap_of(ts, w) >= el && !m_valid[ts][w] && exp_w < 0) exp_w = w;
    if (exp_w >= 0) n_inv_fill++;
    else begin
      best = -1;
      for (int w = 0; w < WAYS; w++)
        if (cap_of(ts, w) >= el && m_age[ts][w] > best) begin best = m_age[ts][w]; exp_w = w; end
      if (exp_w >= 0) n_lru_evict++; else n_no_room++;
    end
    @(negedge clk);
    wr_valid = 1;
    wr_set = SW'(set_of(ts));
    for (int k = 0; k < 64; k++) wr_block[k] = b[k];
    checks++;
    if (!wr_ready) fail("write not ready");
    @(negedge clk);
    wr_valid = 0;
    checks++;
    if (!wr_resp_valid || wr_resp_alloc != (exp_w >= 0) || int'(wr_resp_cc) != rcc ||
        int'(wr_resp_ecb_len) != el || (exp_w >= 0 && int'(wr_resp_way) != exp_w))
      fail($sformatf("write resp: v %b alloc %b way %0d cc %0d len %0d; expected way %0d cc %0d len %0d",
                     wr_resp_valid, wr_resp_alloc, wr_resp_way, wr_resp_cc, wr_resp_ecb_len, exp_w, rcc, el));
    n_class[rcc]++;
    if (exp_w >= 0) begin
      st = wl % 66;
      if (cap_of(ts, exp_w) < 66) n_degraded_use++;
      ref_place(m_fm[ts][exp_w], st, el, pos);
      img = dut.u_data.mem[{SW'(set_of(ts)), WW'(exp_w)}];
      checks++;
      for (int j = 0; j < el; j++)
        if (img[pos[j]] != recb[j]) begin
          fail($sformatf("frame image: ECB byte %0d at %0d is %h, expected %h", j, pos[j], img[pos[j]], recb[j]));
          break;
        end
      m_valid[ts][exp_w] = 1;
      m_blk[ts][exp_w] = b;
      m_cc[ts][exp_w] = rcc;
      touch(ts, exp_w);
      wl++;
      if (wl % 66 == 0) n_wl_wrap++;
    end
  endtask

  // read and check; expect_err: 0 none, 1 single, 2 double
  task automatic do_read(int ts, int way, int expect_err, output bit exc, output int exc_b);
    @(negedge clk);
    rd_valid = 1;
    rd_set = SW'(set_of(ts));
    rd_way = WW'(way);
    checks++;
    if (!rd_ready) fail("read not ready");
    @(negedge clk);
    rd_valid = 0;
    exc = exc_valid;
    exc_b = int'(exc_byte);
    checks++;
    if (!rd_resp_valid || rd_resp_hit != m_valid[ts][way])
      fail($sformatf("read resp: v %b hit %b expected hit %b", rd_resp_valid, rd_resp_hit, m_valid[ts][way]));
    if (m_valid[ts][way]) begin
      checks++;
      if (expect_err != 2) begin
        for (int k = 0; k < 64; k++)
          if (rd_resp_block[k] != m_blk[ts][way][k]) begin
            fail($sformatf("read data byte %0d: %h expected %h (cc %0d)", k, rd_resp_block[k], m_blk[ts][way][k], m_cc[ts][way]));
            break;
          end
      end
      checks++;
      if (rd_resp_corrected != (expect_err == 1) || rd_resp_uncorrectable != (expect_err == 2))
        fail($sformatf("read flags corr %b unc %b, expected error kind %0d", rd_resp_corrected, rd_resp_uncorrectable, expect_err));
      if (rd_resp_corrected) n_corrected++;
      if (rd_resp_uncorrectable) n_uncorr++;
      if (exc_valid) begin
        n_exc++;
        checks++;
        if (int'(exc_set) != set_of(ts) || int'(exc_way) != way) fail("exception names the wrong frame");
      end
      touch(ts, way);
    end
  endtask

  task automatic do_disable(int ts, int way, int p);
    @(negedge clk);
    dis_valid = 1;
    dis_set = SW'(set_of(ts));
    dis_way = WW'(way);
    dis_byte = POS_W'(p);
    @(negedge clk);
    dis_valid = 0;
    m_fm[ts][way][p] = 1;
    m_valid[ts][way] = 0;
    n_disabled++;
  endtask

  // position in the frame of ECB byte j of a stored block
  function automatic int phys_of(int ts, int way, int j, int start);
    int pos [66];
    blk_a rcb;
    frm_a recb;
    int rcc, el;
    ref_compress(m_blk[ts][way], rcc, rcb);
    el = ref_ecc(rcc, rcb, recb);
    ref_place(m_fm[ts][way], start, el, pos);
    return pos[j];
  endfunction

  int m_start [NTS][WAYS];

  task automatic random_writes(int n);
    int ts, way;
    bit e; int eb;
    for (int i = 0; i < n; i++) begin
      ts = $urandom_range(NTS - 1);
      do_write(ts, gen_block($urandom_range(0, 9)));
      // the written way is now age 0
      for (int w = 0; w < WAYS; w++) if (m_valid[ts][w] && m_age[ts][w] == 0) begin
        m_start[ts][w] = (wl + 65) % 66;
        way = w;
      end
      if ($urandom_range(1) == 1) begin
        ts = $urandom_range(NTS - 1);
        do_read(ts, $urandom_range(WAYS - 1), 0, e, eb);
      end
    end
  endtask

  initial begin
    bit e; int eb, ts, way, j, el, p, b1, b2, rcc, cnt;
    blk_a rcb, blk;
    frm_a recb;
    frame_t img;
    foreach (n_class[k]) n_class[k] = 0;
    for (int t = 0; t < NTS; t++)
      for (int w = 0; w < WAYS; w++) begin
        m_valid[t][w] = 0; m_age[t][w] = w; m_cc[t][w] = 0; m_start[t][w] = 0;
        for (int q = 0; q < 66; q++) m_fm[t][w][q] = 0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cnt = 0;
    while (!init_done) begin @(posedge clk); cnt++; end
    checks++;
    if (cnt < SETS - 2 || cnt > SETS + 2) fail($sformatf("initialisation took %0d cycles", cnt));

    random_writes(300);

    // single faults in stored bytes: correction, exception, disable
    for (int k = 0; k < 24; k++) begin
      ts = $urandom_range(NTS - 1);
      way = $urandom_range(WAYS - 1);
      if (!m_valid[ts][way]) continue;
      ref_compress(m_blk[ts][way], rcc, rcb);
      el = ref_ecc(rcc, rcb, recb);
      j = $urandom_range(el - 1);
      if (el - ref_cb_len(rcc) == 2 && j == el - 1) b1 = $urandom_range(2);
      else b1 = $urandom_range(7);
      p = phys_of(ts, way, j, m_start[ts][way]);
      img = dut.u_data.mem[{SW'(set_of(ts)), WW'(way)}];
      img[p][b1] = ~img[p][b1];
      dut.u_data.mem[{SW'(set_of(ts)), WW'(way)}] = img;
      do_read(ts, way, 1, e, eb);
      checks++;
      if (!e || eb != p) fail($sformatf("exception %b at byte %0d, expected byte %0d", e, eb, p));
      if (e) begin
        do_disable(ts, way, eb);
        do_read(ts, way, 0, e, eb);    // frame now empty
      end
    end

    random_writes(300);

    // double fault: detection
    for (int k = 0; k < 4; k++) begin
      ts = $urandom_range(NTS - 1);
      way = $urandom_range(WAYS - 1);
      if (!m_valid[ts][way]) continue;
      ref_compress(m_blk[ts][way], rcc, rcb);
      el = ref_ecc(rcc, rcb, recb);
      if (el < 8) continue;
      p = phys_of(ts, way, 0, m_start[ts][way]);
      img = dut.u_data.mem[{SW'(set_of(ts)), WW'(way)}];
      img[p][0] = ~img[p][0];
      img[p][1] = ~img[p][1];
      dut.u_data.mem[{SW'(set_of(ts)), WW'(way)}] = img;
      do_read(ts, way, 2, e, eb);
      // rewrite the frame contents so later reads are clean
      img[p][0] = ~img[p][0];
      img[p][1] = ~img[p][1];
      dut.u_data.mem[{SW'(set_of(ts)), WW'(way)}] = img;
    end

    // degrade every frame of one set: an uncompressed block no longer fits,
    // a compressed one still does
    ts = NTS - 1;
    for (int w = 0; w < WAYS; w++) if (!m_fm[ts][w][w]) do_disable(ts, w, w);
    for (int k = 0; k < 64; k++) blk[k] = 8'($urandom);
    do_write(ts, blk);
    checks++;
    if (wr_resp_alloc) fail("uncompressed block allocated in a fully degraded set");
    do_write(ts, gen_block(3));
    checks++;
    if (!wr_resp_alloc) fail("compressed block not allocated in a degraded set");

    // write and read requested together: the read waits
    @(negedge clk);
    wr_valid = 1; wr_set = SW'(set_of(0)); wr_block = '0;
    rd_valid = 1; rd_set = SW'(set_of(1)); rd_way = '0;
    #1;
    checks++;
    if (rd_ready || !wr_ready) fail("write did not take priority over read");
    else n_rd_stall++;
    // keep the model in step: this write allocates a zero block in set 0
    wr_valid = 0; rd_valid = 0;
    @(negedge clk);
    do_write(0, gen_block(0));
    random_writes(50);

    // every mechanism must have happened
    checks++;
    for (int c = 0; c <= 8; c++) if (n_class[c] == 0) fail($sformatf("class %0d never written", c));
    if (n_class[15] == 0) fail("uncompressed class never written");
    if (n_inv_fill == 0) fail("no fill of an empty frame");
    if (n_lru_evict == 0) fail("no LRU eviction");
    if (n_no_room == 0) fail("no write without room");
    if (n_degraded_use == 0) fail("no block written to a degraded frame");
    if (n_corrected == 0 || n_exc == 0) fail("no corrected fault / exception");
    if (n_disabled == 0) fail("no byte disabled");
    if (n_uncorr == 0) fail("no uncorrectable fault detected");
    if (n_wl_wrap == 0) fail("wear-leveling position never wrapped");
    if (n_rd_stall == 0) fail("no read stall");
    $display("classes: zero %0d b8d1..7 %0d %0d %0d %0d %0d %0d %0d b4d1 %0d uncomp %0d",
             n_class[0], n_class[1], n_class[2], n_class[3], n_class[4], n_class[5], n_class[6],
             n_class[7], n_class[8], n_class[15]);
    $display("fills %0d evictions %0d no-room %0d degraded-frame writes %0d corrected %0d exceptions %0d disabled %0d uncorrectable %0d wl-wraps %0d read-stalls %0d",
             n_inv_fill, n_lru_evict, n_no_room, n_degraded_use, n_corrected, n_exc, n_disabled,
             n_uncorr, n_wl_wrap, n_rd_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
