// touche_llc: a compressed shared last-level cache controller that stores
// several compressed blocks from arbitrary addresses in one physical line
// without widening the tag entry (Touche).
//
// The cache defaults to 4 MB, 8 ways, 64-byte lines and a 48-bit physical
// address: a 29-bit tag, 13 set bits and 6 offset bits. The two lowest tag
// bits are taken from address bits 7:6 (the block's position in an aligned
// group of four) and the set index from the bits above them, so the four
// neighbours of a superblock share a set. This mapping is this design's
// choice; the paper only says the superblock signature ignores the last two
// tag bits.
//
// Lookup (paper Fig. 16b). The set's tag entries are read; uncompressed ways
// are matched on the full tag, compressed ways on 9-bit signatures (SIGN) or,
// when their marker matches, on the superblock signature (SMARK). Each
// candidate way is then read from the data array in way order and TADA checks
// the full tag appended to the data; a candidate that does not hold the
// block is a signature (or marker) collision and costs another access.
//
// Install (paper Fig. 16a), after a read miss or a write that missed. The
// block is compressed (BDI and FPC, the better result kept); with compression disabled by the latency monitor, or
// if it does not fit in 32 bytes, it is installed uncompressed. Otherwise the
// compressed lines of the set are read one by one: a line holding exactly the
// other three neighbours of the block becomes a superblock; a line with room
// takes the block. Failing both, a free way is used, else the LRU way is the
// victim and random blocks are evicted from it (dirty ones written back) until
// the block fits. A superblock losing a block is rewritten as three arbitrary
// blocks. An L2 write that hits removes the old copy and installs the new
// data dirty.
//
// Timing: the array models are single-cycle; the controller adds wait cycles
// so that a lookup costs TAG_LAT and every data-array access DATA_LAT cycles
// (paper: 5 and 30). A read hit in the first probed way answers TAG_LAT +
// DATA_LAT cycles after the request is accepted; every extra probe adds
// TAG_LAT + DATA_LAT (35, 70, 105 as in the paper's Table 3). One request is
// handled at a time (req_ready is low while busy). TAG_LAT >= 3 and
// DATA_LAT >= 2 are required by the wait counters.
//
// Interfaces: a valid/ready request port from the L2 side with a one-cycle
// resp_valid pulse per request (read data on reads); a valid/ready read port
// and read-data pulse to main memory; a valid/ready write-back port. All
// signals are synchronous to clk, reset is active-low and asynchronous. After
// reset the controller clears the tag array (one set per cycle), loads the
// signature tables and draws the marker, then raises boot_done. The
// handshake assertions at the end are disabled during reset, so rst_n is
// also sampled by them at the clock; lint reports that use next to the
// asynchronous reset of the flip-flops, and it is intended.
module touche_llc
  import touche_pkg::*;
#(
  parameter int unsigned SET_BITS    = 13,
  parameter int unsigned WAYS        = 8,
  parameter int unsigned TAG_LAT     = 5,
  parameter int unsigned DATA_LAT    = 30,
  parameter int unsigned WINDOW_LOG2 = 10,
  parameter int unsigned THRESHOLD   = 140,
  parameter int unsigned ADDR_W      = TAG_W + SET_BITS + OFFSET_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        boot_seed,
  output logic               boot_done,
  // L2 side
  input  logic               req_valid,
  output logic               req_ready,
  input  req_op_t            req_op,
  input  logic [ADDR_W-1:0]  req_addr,
  input  logic [LINE_W-1:0]  req_wdata,
  output logic               resp_valid,
  output req_op_t            resp_op,
  output logic               resp_hit,
  output logic [LINE_W-1:0]  resp_data,
  // main memory read
  output logic               mem_rd_valid,
  input  logic               mem_rd_ready,
  output logic [ADDR_W-1:0]  mem_rd_addr,
  input  logic               mem_rd_resp_valid,
  input  logic [LINE_W-1:0]  mem_rd_resp_data,
  // main memory write-back
  output logic               mem_wr_valid,
  input  logic               mem_wr_ready,
  output logic [ADDR_W-1:0]  mem_wr_addr,
  output logic [LINE_W-1:0]  mem_wr_data,
  // status
  output logic               compress_en,
  output logic [MARK_W-1:0]  marker,
  output llc_stats_t         stats
);

  localparam int unsigned SETS  = 1 << SET_BITS;
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned CNT_W = 8;

  localparam logic [2:0] OP_NONE = 3'd0, OP_INSERT = 3'd1, OP_REMOVE = 3'd2,
                         OP_BUILD = 3'd3, OP_SPLIT = 3'd4;

  typedef enum logic [3:0] {
    S_BOOT, S_BOOTWAIT, S_IDLE, S_TAG, S_DWAIT, S_MEMREQ, S_MEMWAIT,
    S_INST, S_SWAIT, S_VWAIT, S_EVICT, S_FIT, S_WB, S_DONE
  } state_t;

  state_t state, wb_ret;

  // ---------------------------------------------------------------- helpers
  function automatic logic [TAG_W-1:0] addr_tag(input logic [ADDR_W-1:0] a);
    return {a[ADDR_W-1 -: TAG_W-2], a[OFFSET_W +: 2]};
  endfunction
  function automatic logic [SET_BITS-1:0] addr_set(input logic [ADDR_W-1:0] a);
    return a[OFFSET_W+2 +: SET_BITS];
  endfunction
  function automatic logic [ADDR_W-1:0] make_addr(input logic [TAG_W-1:0] t,
                                                  input logic [SET_BITS-1:0] s);
    return {t[TAG_W-1:2], s, t[1:0], {OFFSET_W{1'b0}}};
  endfunction

  // ---------------------------------------------------------------- registers
  req_op_t                op_r;
  logic [TAG_W-1:0]       tag_r;
  logic [SET_BITS-1:0]    set_r;
  logic [LINE_W-1:0]      blk_r;        // block being installed
  logic                   blk_dirty_r;
  tag_entry_t [WAYS-1:0]  ents;         // working copy of the set
  logic [WAYS-1:0]        cand_r, scan_r;
  logic [WAY_W-1:0]       way_r;
  logic [LINE_W-1:0]      line_q;
  logic                   probing_r;    // S_DWAIT: compressed probe (else uncompressed hit)
  logic                   victim_uncomp_r;
  logic                   use_comp_r;
  logic                   hit_r;
  logic                   evict_req_r;  // S_EVICT removes the requested block
  logic [CNT_W-1:0]       wcnt;
  logic [15:0]            lat_cnt;
  logic [SET_BITS:0]      boot_set;
  logic [15:0]            rnd;

  // array ports (registered)
  logic                   ta_rd_en, ta_wr_en;
  tag_entry_t [WAYS-1:0]  ta_rd_data;
  logic                   da_rd_en, da_wr_en;
  logic [SET_BITS+WAY_W-1:0] da_rd_addr, da_wr_addr;
  logic [LINE_W-1:0]      da_rd_data, da_wr_data;
  logic                   boot_pulse;
  tag_entry_t [WAYS-1:0]  boot_row;
  logic                   boot_wr;

  tag_array #(.SETS(SETS), .WAYS(WAYS)) u_tags (
    .clk, .rd_en(ta_rd_en), .rd_set(set_r), .rd_data(ta_rd_data),
    .wr_en(ta_wr_en || boot_wr),
    .wr_set(boot_wr ? boot_set[SET_BITS-1:0] : set_r),
    .wr_data(boot_wr ? boot_row : ents));

  data_array #(.SETS(SETS), .WAYS(WAYS)) u_data (
    .clk, .rd_en(da_rd_en), .rd_addr(da_rd_addr), .rd_data(da_rd_data),
    .wr_en(da_wr_en), .wr_addr(da_wr_addr), .wr_data(da_wr_data));

  always_comb
    for (int w = 0; w < WAYS; w++) boot_row[w] = '{tag: '0, dirty: 1'b0, valid: 1'b0,
                                                  repl: REPL_W'(w)};
  assign boot_wr = (state == S_BOOT);

  // ------------------------------------------------------- SIGN and SMARK
  localparam int unsigned NSIG = 5;
  logic [TAG_W-1:0] sig_tag [NSIG];
  logic             sig_sb  [NSIG];
  logic [SIG_W-1:0] sig_v   [NSIG];
  logic [NSLOT-1:0][TAG_W-1:0] tada_out_tags;

  always_comb begin
    sig_tag[0] = tag_r;            sig_sb[0] = 1'b0;   // access signature
    sig_tag[1] = tag_r;            sig_sb[1] = 1'b1;   // superblock signature
    for (int i = 0; i < NSLOT; i++) begin
      sig_tag[2+i] = tada_out_tags[i]; sig_sb[2+i] = 1'b0;  // split rewrite
    end
  end

  sign_engine #(.NPORTS(NSIG)) u_sign (
    .clk, .rst_n, .boot(boot_pulse), .seed(boot_seed),
    .tag_in(sig_tag), .sb_mode(sig_sb), .sig_out(sig_v));

  tag_entry_t [WAYS-1:0]        tm_ents;
  logic [WAYS-1:0][TAG_W-1:0]   tm_tags;
  logic [WAYS-1:0]              mark_match, uncomp_hit, cand, free_way;
  line_kind_t [WAYS-1:0]        kind;
  logic                         smark_ready;

  assign tm_ents = (state == S_TAG) ? ta_rd_data : ents;
  always_comb for (int w = 0; w < WAYS; w++) tm_tags[w] = tm_ents[w].tag;

  smark #(.WAYS(WAYS)) u_smark (
    .clk, .rst_n, .boot(boot_pulse), .seed(boot_seed), .way_tag(tm_tags),
    .marker, .ready(smark_ready), .mark_match);

  tag_manager #(.WAYS(WAYS)) u_tm (
    .entries(tm_ents), .req_tag(tag_r), .sig(sig_v[0]), .sb_sig(sig_v[1]),
    .mark_match, .kind, .uncomp_hit, .cand, .free_way);

  // ------------------------------------------------------------ replacement
  logic [WAYS-1:0][REPL_W-1:0] ages, ages_touched;
  logic [WAY_W-1:0]            lru_victim;
  always_comb for (int w = 0; w < WAYS; w++) ages[w] = ents[w].repl;
  lru_repl #(.WAYS(WAYS)) u_lru (
    .age_in(ages), .way(way_r), .age_out(ages_touched), .victim(lru_victim));

  // ----------------------------------------------------------- compression
  comp_t            c_comp;
  size_t_e          c_size;
  logic [CPAY_W-1:0] c_payload;
  compress_engine u_comp (.data(blk_r), .comp(c_comp), .size(c_size),
                         .payload(c_payload));

  // ------------------------------------------------------------------ TADA
  logic                 wait_last;
  logic [LINE_W-1:0]    t_line;
  logic [TAG_W-1:0]     t_req_tag;
  logic                 t_is_super, t_hit, t_hit_dirty, t_f16, t_f32, t_sbc;
  tada_rec_t [NSLOT-1:0] t_rec;
  logic [TAG_W-1:0]     t_sb_tag;
  logic [1:0]           t_hit_slot, t_f16_slot, t_f32_slot, t_nvalid, t_slot;
  comp_t                t_hit_comp;
  logic [PAYLOAD_W-1:0] t_hit_payload;
  logic [2:0]           t_op;
  tada_rec_t            t_ins_rec;
  logic [LINE_W-1:0]    t_line_out;
  logic                 t_any_valid, t_any_dirty;
  logic [TAG_W-1:0]     evict_tag;
  logic                 fits;
  logic [1:0]           fit_slot;

  assign wait_last = (wcnt == '0);
  // the data line under inspection: straight from the array in the last
  // cycle of a data wait, otherwise the held copy
  assign t_line = ((state == S_DWAIT || state == S_SWAIT || state == S_VWAIT) && wait_last)
                  ? da_rd_data : line_q;

  // block chosen for eviction: random valid slot, or random superblock member
  always_comb begin
    tada_rec_t r;
    logic [1:0] s0;
    logic found;
    s0 = (rnd[1:0] == 2'd3) ? 2'd0 : rnd[1:0];
    evict_tag = t_rec[0].tag;
    found = 1'b0;
    for (int i = 0; i < NSLOT; i++) begin
      logic [1:0] s;
      s = 2'((int'(s0) + i) % NSLOT);
      r = t_rec[s];
      if (!found && r.valid) begin evict_tag = r.tag; found = 1'b1; end
    end
    if (t_is_super) evict_tag = {t_sb_tag[TAG_W-1:2], rnd[3:2]};
  end
  assign t_req_tag = (state == S_EVICT && !evict_req_r) ? evict_tag : tag_r;

  tada u_tada (
    .line_in(t_line), .req_tag(t_req_tag),
    .line_dirty(ents[way_r].tag[LD_BIT]),
    .is_super(t_is_super), .rec(t_rec), .sb_tag(t_sb_tag), .hit(t_hit),
    .hit_slot(t_hit_slot), .hit_comp(t_hit_comp), .hit_dirty(t_hit_dirty),
    .hit_payload(t_hit_payload), .free16_ok(t_f16), .free16_slot(t_f16_slot),
    .free32_ok(t_f32), .free32_slot(t_f32_slot), .sb_candidate(t_sbc),
    .nvalid(t_nvalid),
    .op(t_op), .slot(t_slot), .ins_payload(c_payload[PAYLOAD_W-1:0]),
    .ins_rec(t_ins_rec), .line_out(t_line_out), .out_any_valid(t_any_valid),
    .out_any_dirty(t_any_dirty), .out_tags(tada_out_tags));

  logic [LINE_W-1:0] d_data;
  decompress_engine u_decomp (.comp(t_hit_comp), .payload(CPAY_W'(t_hit_payload)),
                             .data(d_data));

  assign t_ins_rec = '{valid: 1'b1, dirty: blk_dirty_r, comp: c_comp, tag: tag_r};
  assign fits      = (c_size == SZ_16) ? t_f16 : t_f32;
  assign fit_slot  = (c_size == SZ_16) ? t_f16_slot : t_f32_slot;

  logic sb_ok;
  assign sb_ok = t_sbc && (c_comp == C_B8D1 || c_comp == C_ZEROS);

  // TADA operation of the current state
  always_comb begin
    t_op = OP_NONE; t_slot = 2'd0;
    case (state)
      S_SWAIT: if (wait_last) begin
        if (sb_ok)     begin t_op = OP_BUILD; end
        else if (fits) begin t_op = OP_INSERT; t_slot = fit_slot; end
      end
      S_EVICT: if (!victim_uncomp_r) begin
        t_op = t_is_super ? OP_SPLIT : OP_REMOVE; t_slot = t_hit_slot;
      end
      S_FIT:   if (use_comp_r && fits) begin t_op = OP_INSERT; t_slot = fit_slot; end
      default: ;
    endcase
  end

  // ------------------------------------------------------- latency monitor
  logic mon_valid, mon_switched;
  logic [15:0] mon_mean;
  assign mon_valid = resp_valid && (resp_op == REQ_READ);
  latency_monitor #(.WINDOW_LOG2(WINDOW_LOG2), .THRESHOLD(THRESHOLD)) u_mon (
    .clk, .rst_n, .sample_valid(mon_valid), .sample_lat(lat_cnt + 16'd1),
    .enable(compress_en), .switched(mon_switched), .last_mean(mon_mean));

  // ------------------------------------------------------------ interfaces
  assign req_ready = (state == S_IDLE) && !ta_wr_en && !da_wr_en;
  assign mem_rd_valid = (state == S_MEMREQ);
  assign mem_rd_addr  = make_addr(tag_r, set_r);

  logic [WAY_W-1:0] first_cand, first_scan, first_free, first_arb;
  logic [WAYS-1:0]  arb_mask;
  logic any_free, comp_ok;
  assign comp_ok = compress_en && (c_size == SZ_16 || c_size == SZ_32);
  always_comb begin
    for (int w = 0; w < WAYS; w++) arb_mask[w] = (kind[w] == L_ARB);
    first_arb = '0;
    for (int w = WAYS-1; w >= 0; w--) if (arb_mask[w]) first_arb = WAY_W'(w);
    first_cand = '0;
    for (int w = WAYS-1; w >= 0; w--) if (cand_r[w]) first_cand = WAY_W'(w);
    first_scan = '0;
    for (int w = WAYS-1; w >= 0; w--) if (scan_r[w]) first_scan = WAY_W'(w);
    first_free = '0; any_free = 1'b0;
    for (int w = WAYS-1; w >= 0; w--)
      if (free_way[w]) begin first_free = WAY_W'(w); any_free = 1'b1; end
  end

  // compressed-line tag field for a single block in slot 0
  function automatic logic [TAG_W-1:0] fresh_ctag(input logic [SIG_W-1:0] s,
                                                  input logic d);
    logic [TAG_W-1:0] t;
    t = '0;
    t[LV_BIT] = 1'b1;
    t[LD_BIT] = d;
    t[SIG_W-1:0] = s;
    return t;
  endfunction

  // ------------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_BOOT; wb_ret <= S_IDLE;
      op_r <= REQ_READ; tag_r <= '0; set_r <= '0; blk_r <= '0; blk_dirty_r <= 1'b0;
      ents <= '0; cand_r <= '0; scan_r <= '0; way_r <= '0; line_q <= '0;
      probing_r <= 1'b0; victim_uncomp_r <= 1'b0; use_comp_r <= 1'b0; hit_r <= 1'b0;
      evict_req_r <= 1'b0;
      wcnt <= '0; lat_cnt <= '0; boot_set <= '0; rnd <= 16'h1D2B;
      ta_rd_en <= 1'b0; ta_wr_en <= 1'b0; da_rd_en <= 1'b0; da_wr_en <= 1'b0;
      da_rd_addr <= '0; da_wr_addr <= '0; da_wr_data <= '0;
      boot_pulse <= 1'b0; boot_done <= 1'b0;
      resp_valid <= 1'b0; resp_op <= REQ_READ; resp_hit <= 1'b0; resp_data <= '0;
      mem_wr_valid <= 1'b0; mem_wr_addr <= '0; mem_wr_data <= '0;
      stats <= '0;
    end else begin
      // defaults
      ta_rd_en <= 1'b0; ta_wr_en <= 1'b0; da_rd_en <= 1'b0; da_wr_en <= 1'b0;
      boot_pulse <= 1'b0; resp_valid <= 1'b0;
      rnd <= rnd[0] ? ((rnd >> 1) ^ 16'hB400) : (rnd >> 1);
      if (state != S_IDLE) lat_cnt <= lat_cnt + 16'd1;
      if (wcnt != '0) wcnt <= wcnt - 1'b1;
      if (mon_switched) stats.mode_switches <= stats.mode_switches + 1;

      case (state)
        // ---------------------------------------------------------- boot
        S_BOOT: begin
          if (boot_set == '0) boot_pulse <= 1'b1;
          boot_set <= boot_set + 1'b1;
          if (boot_set == (SET_BITS+1)'(SETS - 1)) state <= S_BOOTWAIT;
        end
        S_BOOTWAIT: if (smark_ready) begin boot_done <= 1'b1; state <= S_IDLE; end

        // ---------------------------------------------------------- lookup
        S_IDLE: if (req_valid && req_ready) begin
          op_r  <= req_op;
          tag_r <= addr_tag(req_addr);
          set_r <= addr_set(req_addr);
          blk_r <= req_wdata;
          blk_dirty_r <= (req_op == REQ_WRITE);
          lat_cnt <= '0;
          hit_r <= 1'b0;
          ta_rd_en <= 1'b1;
          wcnt  <= CNT_W'(TAG_LAT - 2);
          state <= S_TAG;
          if (req_op == REQ_READ) stats.reads <= stats.reads + 1;
          else                    stats.writes <= stats.writes + 1;
        end

        S_TAG: if (wait_last) begin
          ents <= ta_rd_data;
          if (|uncomp_hit) begin
            for (int w = 0; w < WAYS; w++) if (uncomp_hit[w]) way_r <= WAY_W'(w);
            for (int w = 0; w < WAYS; w++)
              if (uncomp_hit[w]) da_rd_addr <= {set_r, WAY_W'(w)};
            da_rd_en  <= 1'b1;
            probing_r <= 1'b0;
            wcnt  <= CNT_W'(DATA_LAT - 1);
            state <= S_DWAIT;
          end else if (|cand) begin
            logic [WAY_W-1:0] fw;
            fw = '0;
            for (int w = WAYS-1; w >= 0; w--) if (cand[w]) fw = WAY_W'(w);
            way_r <= fw;
            cand_r <= cand & ~(WAYS'(1) << fw);
            da_rd_addr <= {set_r, fw};
            da_rd_en  <= 1'b1;
            probing_r <= 1'b1;
            for (int w = 0; w < WAYS; w++)
              if (cand[w] && kind[w] == L_SUPER) stats.marker_probes <= stats.marker_probes + 1;
            wcnt  <= CNT_W'(DATA_LAT - 1);
            state <= S_DWAIT;
          end else begin
            stats.misses <= stats.misses + 1;
            state <= (op_r == REQ_READ) ? S_MEMREQ : S_INST;
          end
        end

        S_DWAIT: if (wait_last) begin
          line_q <= da_rd_data;
          if (!probing_r) begin
            // uncompressed hit
            stats.hits_uncomp <= stats.hits_uncomp + 1;
            hit_r <= 1'b1;
            for (int w = 0; w < WAYS; w++) ents[w].repl <= ages_touched[w];
            ta_wr_en <= 1'b1;
            if (op_r == REQ_READ) begin
              resp_valid <= 1'b1; resp_op <= REQ_READ; resp_hit <= 1'b1;
              resp_data  <= da_rd_data;
              state <= S_IDLE;
            end else begin
              ents[way_r].dirty <= 1'b1;
              da_wr_en <= 1'b1; da_wr_addr <= {set_r, way_r}; da_wr_data <= blk_r;
              resp_valid <= 1'b1; resp_op <= REQ_WRITE; resp_hit <= 1'b1;
              state <= S_IDLE;
            end
          end else if (t_hit) begin
            // compressed hit confirmed by the full tag in the data line
            hit_r <= 1'b1;
            if (t_is_super) stats.hits_super <= stats.hits_super + 1;
            else            stats.hits_comp  <= stats.hits_comp + 1;
            for (int w = 0; w < WAYS; w++) ents[w].repl <= ages_touched[w];
            ta_wr_en <= 1'b1;
            if (op_r == REQ_READ) begin
              resp_valid <= 1'b1; resp_op <= REQ_READ; resp_hit <= 1'b1;
              resp_data  <= d_data;
              state <= S_IDLE;
            end else begin
              // the new data replaces the old copy: evict it, then install
              victim_uncomp_r <= 1'b0;
              evict_req_r <= 1'b1;
              state <= S_EVICT;
              wb_ret <= S_INST;
            end
          end else begin
            stats.sig_collisions <= stats.sig_collisions + 1;
            if (|cand_r) begin
              way_r <= first_cand;
              cand_r <= cand_r & ~(WAYS'(1) << first_cand);
              da_rd_addr <= {set_r, first_cand};
              da_rd_en <= 1'b1;
              wcnt <= CNT_W'(TAG_LAT + DATA_LAT - 1);
            end else begin
              stats.misses <= stats.misses + 1;
              state <= (op_r == REQ_READ) ? S_MEMREQ : S_INST;
            end
          end
        end

        // ---------------------------------------------------------- miss
        S_MEMREQ: if (mem_rd_ready) state <= S_MEMWAIT;
        S_MEMWAIT: if (mem_rd_resp_valid) begin
          blk_r <= mem_rd_resp_data;
          resp_valid <= 1'b1; resp_op <= REQ_READ; resp_hit <= 1'b0;
          resp_data <= mem_rd_resp_data;
          state <= S_INST;
        end

        // ---------------------------------------------------------- install
        S_INST: begin
          line_q <= '0;
          victim_uncomp_r <= 1'b0;
          use_comp_r <= comp_ok;
          if (comp_ok && |arb_mask) begin
            way_r  <= first_arb;
            scan_r <= arb_mask & ~(WAYS'(1) << first_arb);
            da_rd_addr <= {set_r, first_arb}; da_rd_en <= 1'b1;
            wcnt  <= CNT_W'(DATA_LAT - 1);
            state <= S_SWAIT;
          end else begin
            probing_r <= 1'b1;        // choose a victim in S_VWAIT
            wcnt  <= '0;
            state <= S_VWAIT;
          end
        end

        S_SWAIT: if (wait_last) begin
          if (sb_ok || fits) begin
            da_wr_en <= 1'b1; da_wr_addr <= {set_r, way_r}; da_wr_data <= t_line_out;
            if (sb_ok) begin
              ents[way_r].tag <= {1'b1, t_any_dirty, marker, 2'b00, sig_v[1]};
              stats.sb_formed <= stats.sb_formed + 1;
            end else begin
              ents[way_r].tag[LV_BIT] <= 1'b1;
              ents[way_r].tag[LD_BIT] <= t_any_dirty;
              ents[way_r].tag[fit_slot*SIG_W +: SIG_W] <= sig_v[0];
            end
            ents[way_r].valid <= 1'b0; ents[way_r].dirty <= 1'b1;
            for (int w = 0; w < WAYS; w++) ents[w].repl <= ages_touched[w];
            ta_wr_en <= 1'b1;
            stats.inst_comp <= stats.inst_comp + 1;
            state <= S_DONE;
          end else if (|scan_r) begin
            way_r <= first_scan;
            scan_r <= scan_r & ~(WAYS'(1) << first_scan);
            da_rd_addr <= {set_r, first_scan}; da_rd_en <= 1'b1;
            wcnt <= CNT_W'(DATA_LAT - 1);
          end else begin
            probing_r <= 1'b1;        // go choose a victim
            state <= S_VWAIT;
          end
        end

        // S_VWAIT: with probing_r set, choose the victim way; then wait for
        // its line to be read
        S_VWAIT: if (probing_r) begin
          probing_r <= 1'b0;
          if (any_free) begin
            way_r  <= first_free;
            line_q <= '0;
            ents[first_free] <= '{tag: '0, dirty: 1'b0, valid: 1'b0,
                                  repl: ents[first_free].repl};
            state  <= S_FIT;
          end else begin
            way_r <= lru_victim;
            victim_uncomp_r <= ents[lru_victim].valid;
            da_rd_addr <= {set_r, lru_victim}; da_rd_en <= 1'b1;
            wcnt <= CNT_W'(DATA_LAT - 1);
          end
        end else if (wait_last) begin
          line_q <= da_rd_data;
          state  <= S_EVICT;
          wb_ret <= S_FIT;
        end

        // evict one block of line_q (or the whole uncompressed line)
        S_EVICT: begin
          stats.block_evicts <= stats.block_evicts + 1;
          if (victim_uncomp_r) begin
            if (ents[way_r].dirty) begin
              mem_wr_valid <= 1'b1;
              mem_wr_addr  <= make_addr(ents[way_r].tag, set_r);
              mem_wr_data  <= line_q;
              state <= S_WB;
            end else state <= wb_ret;
            ents[way_r] <= '{tag: '0, dirty: 1'b0, valid: 1'b0, repl: ents[way_r].repl};
            line_q <= '0;
            victim_uncomp_r <= 1'b0;
          end else begin
            line_q <= t_line_out;
            da_wr_en <= 1'b1; da_wr_addr <= {set_r, way_r}; da_wr_data <= t_line_out;
            if (t_is_super) begin
              stats.sb_split <= stats.sb_split + 1;
              ents[way_r].tag <= {1'b1, t_any_dirty, sig_v[4], sig_v[3], sig_v[2]};
            end else begin
              ents[way_r].tag[LV_BIT] <= t_any_valid;
              ents[way_r].tag[LD_BIT] <= t_any_dirty;
            end
            // a block replaced by an L2 write is not written back
            evict_req_r <= 1'b0;
            if (t_hit_dirty && !evict_req_r) begin
              mem_wr_valid <= 1'b1;
              mem_wr_addr  <= make_addr(t_req_tag, set_r);
              mem_wr_data  <= d_data;
              state <= S_WB;
            end else state <= wb_ret;
          end
          ta_wr_en <= 1'b1;
        end

        S_WB: if (mem_wr_ready) begin
          mem_wr_valid <= 1'b0;
          stats.writebacks <= stats.writebacks + 1;
          state <= wb_ret;
        end

        // place the block into line_q if it fits, else evict more
        S_FIT: begin
          if (use_comp_r) begin
            if (fits) begin
              logic [TAG_W-1:0] t;
              t = (t_nvalid == 2'd0) ? fresh_ctag(sig_v[0], blk_dirty_r)
                                     : ents[way_r].tag;
              t[LV_BIT] = 1'b1;
              t[LD_BIT] = t_any_dirty;
              t[fit_slot*SIG_W +: SIG_W] = sig_v[0];
              ents[way_r].tag   <= t;
              ents[way_r].valid <= 1'b0;
              ents[way_r].dirty <= 1'b1;
              da_wr_data <= t_line_out;
              stats.inst_comp <= stats.inst_comp + 1;
            end
          end else if (t_nvalid == 2'd0 && !t_is_super) begin
            ents[way_r].tag   <= tag_r;
            ents[way_r].valid <= 1'b1;
            ents[way_r].dirty <= blk_dirty_r;
            da_wr_data <= blk_r;
            stats.inst_uncomp <= stats.inst_uncomp + 1;
          end
          if ((use_comp_r && fits) || (!use_comp_r && t_nvalid == 2'd0 && !t_is_super)) begin
            da_wr_en <= 1'b1; da_wr_addr <= {set_r, way_r};
            for (int w = 0; w < WAYS; w++) ents[w].repl <= ages_touched[w];
            ta_wr_en <= 1'b1;
            state <= S_DONE;
          end else begin
            wb_ret <= S_FIT;
            state  <= S_EVICT;
          end
        end

        S_DONE: begin
          if (op_r == REQ_WRITE) begin
            resp_valid <= 1'b1; resp_op <= REQ_WRITE; resp_hit <= hit_r;
          end
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  // one response per request; memory handshakes hold until accepted
  property p_wr_hold;
    @(posedge clk) disable iff (!rst_n) mem_wr_valid && !mem_wr_ready |=> mem_wr_valid;
  endproperty
  a_wr_hold: assert property (p_wr_hold);
  property p_rd_hold;
    @(posedge clk) disable iff (!rst_n) mem_rd_valid && !mem_rd_ready |=> mem_rd_valid;
  endproperty
  a_rd_hold: assert property (p_rd_hold);

endmodule
