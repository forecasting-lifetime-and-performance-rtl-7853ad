// nvllc_top: data path of a compressed non-volatile last-level cache with
// byte-level disabling.
//
// Write (one block per clock, wr_valid & wr_ready):
//   1 bdi_compressor   64-byte block -> class CC and compressed block CB
//   2 ecc_encoder      CB -> ECB (CB plus one or two SECDED check bytes)
//   3 replacement_logic victim among the set's frames with at least ECB-length
//                      healthy bytes (healthy = not set in the fault map)
//   4 index_calc + crossbar  ECB bytes go, from the global wear-leveling
//                      position on, to the victim's healthy bytes; only those
//                      bytes are written (write-control bits)
// The frame's metadata (valid, CC, start position) is stored with it, the set's
// LRU ages are updated and the wear-leveling counter advances. wr_resp_* reports
// one clock later whether and where the block went; a block for which no frame
// of its set has room is not allocated.
//
// Read (rd_valid & rd_ready, set and way given): the frame is read, the ECB is
// gathered back from the positions recomputed from the fault map and stored
// start, SECDED checked/corrected and decompressed; rd_resp_* is valid one clock
// after the request. A corrected single fault in a frame byte raises exc_valid
// with the physical byte, standing for the operating-system exception of the
// paper. Its handler (software, outside this design) disables the byte through
// dis_*: the fault-map bit is set and the frame invalidated, as its stored
// layout no longer matches the new map (writing back dirty data is the cache
// controller's job). Disables have priority, then writes, then reads.
//
// Tag lookup, coherence and the set-index hash are not part of this data path:
// the requester gives the set (and, for reads, the way). After reset the
// metadata and fault maps are cleared one set per clock (init_done goes high
// after SETS clocks).
//
// The pipeline split (single-cycle write, one-cycle read) and the interface are
// this design's choices; the paper gives the four write steps and the
// byte-disable policy.
module nvllc_top
  import nvllc_pkg::*;
#(
  parameter int unsigned SETS = 4096,   // 4 MB / 64 B / 16 ways
  parameter int unsigned WAYS = 16,
  parameter int unsigned WL_STEP_WRITES = 1,
  localparam int unsigned SW = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               init_done,
  // block write
  input  logic               wr_valid,
  output logic               wr_ready,
  input  logic [SW-1:0]      wr_set,
  input  block_t             wr_block,
  output logic               wr_resp_valid,
  output logic               wr_resp_alloc,
  output logic [WW-1:0]      wr_resp_way,
  output logic [CC_W-1:0]    wr_resp_cc,
  output logic [LEN_W-1:0]   wr_resp_ecb_len,
  // block read
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic [SW-1:0]      rd_set,
  input  logic [WW-1:0]      rd_way,
  output logic               rd_resp_valid,
  output logic               rd_resp_hit,          // frame held a block
  output block_t             rd_resp_block,
  output logic [CC_W-1:0]    rd_resp_cc,
  output logic               rd_resp_corrected,
  output logic               rd_resp_uncorrectable,
  // corrected-fault exception
  output logic               exc_valid,
  output logic [SW-1:0]      exc_set,
  output logic [WW-1:0]      exc_way,
  output logic [POS_W-1:0]   exc_byte,
  // byte disable, from the exception handler
  input  logic               dis_valid,
  output logic               dis_ready,
  input  logic [SW-1:0]      dis_set,
  input  logic [WW-1:0]      dis_way,
  input  logic [POS_W-1:0]   dis_byte
);

  typedef struct packed {
    logic             valid;
    logic [CC_W-1:0]  cc;
    logic [POS_W-1:0] start;
  } frame_meta_t;

  frame_meta_t [WAYS-1:0]   meta [SETS];
  logic [WAYS-1:0][WW-1:0]  lru  [SETS];

  // ---------------------------------------------------------------- init
  logic          init_busy;
  logic [SW-1:0] init_set;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + 1'b1;
      if (int'(init_set) == int'(SETS) - 1) init_busy <= 1'b0;
    end
  end
  assign init_done = !init_busy;

  // ---------------------------------------------------------- arbitration
  logic dis_fire, wr_fire, rd_fire;
  assign dis_ready = !init_busy;
  assign wr_ready  = !init_busy && !dis_valid;
  assign rd_ready  = !init_busy && !dis_valid && !wr_valid;
  assign dis_fire  = dis_valid && dis_ready;
  assign wr_fire   = wr_valid && wr_ready;
  assign rd_fire   = rd_valid && rd_ready;

  // ------------------------------------------------------------ fault maps
  byte_mask_t [WAYS-1:0] set_maps;

  fault_map_array #(.SETS(SETS), .WAYS(WAYS)) u_fmap (
    .clk, .rd_set(wr_fire ? wr_set : rd_set), .rd_maps(set_maps),
    .dis_en(dis_fire), .dis_set, .dis_way, .dis_byte,
    .clr_en(init_busy), .clr_set(init_set)
  );

  // ----------------------------------------------------------- write path
  logic [CC_W-1:0]  w_cc;
  block_t           w_cb;
  logic [LEN_W-1:0] w_cb_len, w_ecb_len;
  frame_t           w_ecb, w_recb;
  logic [WAYS-1:0][LEN_W-1:0] w_cap;
  logic [WAYS-1:0]            w_fvalid;
  logic                       w_found;
  logic [WW-1:0]              w_victim;
  byte_mask_t                 w_vmap, w_be;
  index_vec_t                 w_idx;
  logic [POS_W-1:0]           wl_pos;
  logic [LEN_W-1:0]           w_vcap;       // equals w_cap[w_victim]
  logic                       w_vfits;
  logic                       w_alloc;

  bdi_compressor u_comp (.blk(wr_block), .cc(w_cc), .cb(w_cb), .len(w_cb_len));

  ecc_encoder u_enc (.cc(w_cc), .cb(w_cb), .len(w_cb_len), .ecb(w_ecb), .ecb_len(w_ecb_len));

  always_comb begin
    for (int w = 0; w < int'(WAYS); w++) begin
      w_cap[w]    = LEN_W'(FRAME_BYTES - $countones(set_maps[w]));
      w_fvalid[w] = meta[wr_set][w].valid;
    end
  end

  replacement_logic #(.WAYS(WAYS)) u_repl (
    .need_len(w_ecb_len), .frame_cap(w_cap), .frame_valid(w_fvalid),
    .age(lru[wr_set]), .fault_maps(set_maps),
    .found(w_found), .victim(w_victim), .victim_fault_map(w_vmap)
  );

  wear_level_counter #(.STEP_WRITES(WL_STEP_WRITES)) u_wl (
    .clk, .rst_n, .advance(w_alloc), .pos(wl_pos)
  );

  index_calc u_widx (
    .fault_map(w_vmap), .start(wl_pos), .len(w_ecb_len),
    .idx(w_idx), .wr_en(w_be), .capacity(w_vcap), .fits(w_vfits)
  );

  crossbar u_xbar (.ecb(w_ecb), .idx(w_idx), .wr_en(w_be), .recb(w_recb));

  assign w_alloc = wr_fire && w_found;

  // ------------------------------------------------------------ read path
  logic             r_q_valid;
  logic [SW-1:0]    r_q_set;
  logic [WW-1:0]    r_q_way;
  frame_meta_t      r_q_meta;
  byte_mask_t       r_q_map;
  frame_t           r_frame, r_ecb;
  index_vec_t       r_idx;
  byte_mask_t       r_en;
  logic [LEN_W-1:0] r_ecb_len, r_cap, r_cb_len;
  logic             r_fits;
  block_t           r_cb;
  logic             r_corr, r_unc, r_in_frame;
  logic [POS_W-1:0] r_fbyte, r_fpos;

  nvm_frame_array #(.FRAMES(SETS * WAYS)) u_data (
    .clk,
    .wr_en(w_alloc), .wr_addr({wr_set, w_victim}), .wr_be(w_be), .wr_data(w_recb),
    .rd_en(rd_fire), .rd_addr({rd_set, rd_way}), .rd_data(r_frame)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q_valid <= 1'b0;
      r_q_set   <= '0;
      r_q_way   <= '0;
      r_q_meta  <= '0;
      r_q_map   <= '0;
    end else begin
      r_q_valid <= rd_fire;
      if (rd_fire) begin
        r_q_set  <= rd_set;
        r_q_way  <= rd_way;
        r_q_meta <= meta[rd_set][rd_way];
        r_q_map  <= set_maps[rd_way];
      end
    end
  end

  assign r_ecb_len = cb_len(r_q_meta.cc) + LEN_W'(ecc_len(cb_len(r_q_meta.cc)));

  index_calc u_ridx (
    .fault_map(r_q_map), .start(r_q_meta.start), .len(r_ecb_len),
    .idx(r_idx), .wr_en(r_en), .capacity(r_cap), .fits(r_fits)
  );

  block_gather u_gath (.frame(r_frame), .idx(r_idx), .wr_en(r_en), .ecb(r_ecb));

  ecc_decoder u_dec (
    .cc(r_q_meta.cc), .ecb(r_ecb), .cb(r_cb), .len(r_cb_len),
    .corrected(r_corr), .uncorrectable(r_unc),
    .fault_in_frame(r_in_frame), .fault_byte(r_fbyte)
  );

  bdi_decompressor u_decomp (.cc(r_q_meta.cc), .cb(r_cb), .blk(rd_resp_block));

  // physical frame byte that holds ECB byte r_fbyte
  always_comb begin
    r_fpos = '0;
    for (int p = 0; p < int'(FRAME_BYTES); p++)
      if (r_en[p] && r_idx[p] == r_fbyte) r_fpos = POS_W'(p);
  end

  assign rd_resp_valid         = r_q_valid;
  assign rd_resp_hit           = r_q_meta.valid;
  assign rd_resp_cc            = r_q_meta.cc;
  assign rd_resp_corrected     = r_q_valid && r_q_meta.valid && r_corr;
  assign rd_resp_uncorrectable = r_q_valid && r_q_meta.valid && r_unc;
  assign exc_valid             = rd_resp_corrected && r_in_frame;
  assign exc_set               = r_q_set;
  assign exc_way               = r_q_way;
  assign exc_byte              = r_fpos;

  // ------------------------------------------------- metadata and LRU state
  function automatic logic [WAYS-1:0][WW-1:0] lru_touch(
      input logic [WAYS-1:0][WW-1:0] a, input logic [WW-1:0] way);
    logic [WAYS-1:0][WW-1:0] n;
    n = a;
    for (int w = 0; w < int'(WAYS); w++)
      if (a[w] < a[way]) n[w] = a[w] + 1'b1;
    n[way] = '0;
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (init_busy) begin
      for (int w = 0; w < int'(WAYS); w++) begin
        meta[init_set][w] <= '0;
        lru[init_set][w]  <= WW'(w);
      end
    end else if (dis_fire) begin
      meta[dis_set][dis_way].valid <= 1'b0;
    end else if (w_alloc) begin
      meta[wr_set][w_victim] <= '{valid: 1'b1, cc: w_cc, start: wl_pos};
      lru[wr_set] <= lru_touch(lru[wr_set], w_victim);
    end else if (rd_fire && meta[rd_set][rd_way].valid) begin
      lru[rd_set] <= lru_touch(lru[rd_set], rd_way);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_resp_valid   <= 1'b0;
      wr_resp_alloc   <= 1'b0;
      wr_resp_way     <= '0;
      wr_resp_cc      <= '0;
      wr_resp_ecb_len <= '0;
    end else begin
      wr_resp_valid <= wr_fire;
      if (wr_fire) begin
        wr_resp_alloc   <= w_found;
        wr_resp_way     <= w_victim;
        wr_resp_cc      <= w_cc;
        wr_resp_ecb_len <= w_ecb_len;
      end
    end
  end

  // ------------------------------------------------------------ assertions
  // The chosen victim always has room for the ECB, and the bytes written are
  // exactly as many as the ECB is long.
  assert property (@(posedge clk) disable iff (init_busy)
                   w_alloc |-> (w_vfits && $countones(w_be) == int'(w_ecb_len)));
  assert property (@(posedge clk) disable iff (init_busy)
                   w_alloc |-> (w_vcap == w_cap[w_victim]));
  // A valid frame read back always has room for its own ECB, and the decoder
  // agrees with the stored class on the CB length.
  assert property (@(posedge clk) disable iff (init_busy)
                   (r_q_valid && r_q_meta.valid) |-> (r_fits && r_cap >= r_ecb_len
                                                      && r_cb_len <= LEN_W'(BLOCK_BYTES)));

endmodule
