// hms_channel: DRAM-cache controller of one HMS channel.
//
// One channel of a Heterogeneous Memory Stack carries a DRAM rank, used as a
// direct-mapped cache with 256 B lines, and an SCM rank that holds the data.
// L2 misses (32 B sectors) enter the MSHR, which groups them per line; the
// controller then serves one line entry at a time:
//
//  1. Tag lookup.  The Configurable Tag Cache (CTC) is looked up with the
//     line's DRAM row.  On a CTC miss the row's AMIL column (last 32 B column
//     of the row, holding all 8 lines' tag/valid/dirty and affinity levels)
//     is read from DRAM with one column access and installed in the CTC; a
//     dirty CTC victim sector is first written back into its row's AMIL
//     column with a byte-masked write.
//  2. Hit: the line's columns are read/written in DRAM; a first write sets
//     the line's dirty bit; the SCM penalty score of the access group feeds
//     the channel's moving average.
//  3. Miss: demand reads are served from SCM first.  Then the two-level
//     bypass policy decides.  Level 1 compares penalty levels only; level 2
//     needs the victim's affinity level, read from the AMIL column unless the
//     probe of step 1 already brought it.  Bypass: writes go to SCM, and the
//     victim's level may be decremented.  Fill: the rest of the line is read
//     from SCM and merged with the writes, a dirty victim is read from DRAM
//     and written to SCM, the line is written to DRAM, and its tag and
//     affinity level are stored.
//  4. The last column of every row holds metadata, so SCM data that maps to
//     it (column 7 of line 7) is always accessed in SCM.
//  5. Flat mode (DRAM used as part of memory for small footprints): lines
//     with tag 0 live in DRAM, the others in SCM; no tags are kept.
// Each phase waits for all its column accesses to finish before the next
// starts, so a phase's reads and writes to one row never reorder.
//
// What follows the paper: the operation order of steps 1-3, AMIL, the CTC,
// the two-level policy, last-column bypass, the per-channel MSHR, throttling
// and SLC/MLC/TLC timing, flat mode.  This design's choices: one line entry
// in service at a time, the address split (see hms_pkg), the masked writes
// for metadata, always reading the AMIL column before storing an affinity
// level (the byte holds four lines' levels) and the flat-mode address map.
//
// Interface: L2 requests with valid/ready; read data returns on l2_rsp_valid
// with the request's id, in any order; writes are acknowledged on wr_ack when
// the MSHR accepts them.  The device port carries one command per cycle and
// takes read data tCL cycles after a RD.  Configuration inputs are meant to
// be static while requests are in flight.
module hms_channel
  import hms_pkg::*;
#(
  parameter int MSHR_ENTRIES = 128,
  parameter int CTC_SETS     = 512,
  parameter int MC_QDEPTH    = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            cfg_flat,        // DRAM as part of memory
  input  logic [2:0]      cfg_ctc_ways,    // L2 ways given to the CTC (0..4)
  input  logic            cfg_bypass_en,
  input  logic            cfg_act_en,      // use activation counters
  input  scm_mode_e       cfg_scm_mode,
  input  logic [7:0]      temp,
  input  logic [7:0]      temp_limit,
  input  logic            cfg_throttle_act,
  input  logic            cfg_throttle_wr,
  // L2 side
  input  logic            l2_req_valid,
  output logic            l2_req_ready,
  input  l2_req_t         l2_req,
  output logic            l2_rsp_valid,
  output l2_rsp_t         l2_rsp,
  output logic            wr_ack,
  output logic [ID_W-1:0] wr_ack_id,
  // device side
  output dev_cmd_t        dev_cmd,
  input  logic            dev_rvalid,
  input  logic [COL_W-1:0] dev_rdata,
  // status
  output logic            throttling,
  output logic            idle,
  output chan_stats_t     stats
);
  // ------------------------------------------------------------ kinds of reads
  localparam logic [1:0] K_DEMAND = 2'd0, K_META = 2'd1, K_FILL = 2'd2, K_VICT = 2'd3;

  // ------------------------------------------------------------ submodules
  timing_t scm_t;
  scm_timing u_timing (
    .clk, .rst_n, .mode(cfg_scm_mode), .temp, .temp_limit,
    .throttle_act(cfg_throttle_act), .throttle_wr(cfg_throttle_wr),
    .scm_t, .throttling
  );

  logic                   h_valid, h_busy, take, done;
  logic [LINE_ADDR_W-1:0] h_line;
  logic [7:0]             h_rmask, h_wmask;
  logic [ID_W-1:0]        h_ids [8];
  logic [COL_W-1:0]       h_wdata [8];
  logic [$clog2(MSHR_ENTRIES+1)-1:0] mshr_occ;

  dc_mshr #(.N_ENTRIES(MSHR_ENTRIES)) u_mshr (
    .clk, .rst_n, .in_valid(l2_req_valid), .in_ready(l2_req_ready), .in_req(l2_req),
    .wr_ack, .wr_ack_id,
    .head_valid(h_valid), .head_busy(h_busy), .head_line(h_line),
    .head_rmask(h_rmask), .head_wmask(h_wmask), .head_ids(h_ids), .head_wdata(h_wdata),
    .take, .done, .occupancy(mshr_occ)
  );

  // current line
  logic [DC_TAG_W-1:0] ltag;
  logic [DC_ROW_W-1:0] lrow;
  logic [2:0]          lidx;
  logic [PAGE_W-1:0]   lpage;
  assign ltag  = h_line[LINE_ADDR_W-1 -: DC_TAG_W];
  assign lrow  = h_line[DC_ROW_W+2:3];
  assign lidx  = h_line[2:0];
  assign lpage = {ltag, lrow[DC_ROW_W-1 -: PAGE_W-DC_TAG_W]};

  // CTC
  logic        ctc_hit, ctc_upd, ctc_fill;
  row_tags_t   ctc_tags, ctc_upd_tags, ctc_fill_tags;
  logic [7:0]  ctc_vdirty;
  row_tags_t   ctc_vtags [8];
  logic [DC_ROW_W-4:0] ctc_vgroup;
  ctc #(.N_SETS(CTC_SETS)) u_ctc (
    .clk, .rst_n, .cfg_l2_ways(cfg_flat ? 3'd0 : cfg_ctc_ways), .lk_row(lrow),
    .hit(ctc_hit), .hit_tags(ctc_tags), .vict_dirty(ctc_vdirty), .vict_tags(ctc_vtags),
    .vict_group(ctc_vgroup), .upd_valid(ctc_upd), .upd_tags(ctc_upd_tags),
    .fill_valid(ctc_fill), .fill_tags(ctc_fill_tags)
  );
  logic ctc_on;
  assign ctc_on = !cfg_flat && cfg_ctc_ways != 3'd0;

  // memory controller
  logic        mc_valid, mc_ready, mc_rsp_valid, mc_wr_done, mc_act_valid, mc_idle;
  mc_req_t     mc_req;
  mc_rsp_t     mc_rsp;
  logic [MTAG_W-1:0] mc_wr_tag;
  logic [PAGE_W-1:0] mc_act_page;
  mem_ctrl #(.QDEPTH(MC_QDEPTH)) u_mc (
    .clk, .rst_n, .dram_t(DRAM_TIMING), .scm_t,
    .req_valid(mc_valid), .req_ready(mc_ready), .req(mc_req),
    .rsp_valid(mc_rsp_valid), .rsp(mc_rsp), .wr_done(mc_wr_done), .wr_done_tag(mc_wr_tag),
    .act_valid(mc_act_valid), .act_page(mc_act_page),
    .dev_cmd, .dev_rvalid, .dev_rdata, .idle(mc_idle)
  );

  // activation counters and scores
  logic [7:0]  act_cnt, act_max;
  logic [2:0]  act_shifts;
  act_counter u_act (
    .clk, .rst_n, .enable(cfg_act_en), .act_valid(mc_act_valid), .act_page(mc_act_page),
    .rd_page(lpage), .rd_cnt(act_cnt), .max_cnt(act_max), .shifts_pending(act_shifts)
  );

  logic [3:0]  ncols;
  logic        has_wr;
  logic [31:0] pen_score;
  scm_penalty_unit u_pen (
    .clk, .rst_n, .dram_t(DRAM_TIMING), .scm_t, .num_cols(ncols), .has_write(has_wr),
    .score(pen_score)
  );
  assign ncols  = 4'($countones(h_rmask | h_wmask));
  assign has_wr = |h_wmask;

  logic        bp_hit, bp_commit, l1_pass, bp_fill, bp_dec;
  logic [1:0]  pen_lvl, avg_lvl, aff_lvl;
  line_meta_t  vmeta;
  logic [1:0]  vlvl;
  bypass_policy u_bp (
    .clk, .rst_n, .enable(cfg_bypass_en), .hit_valid(bp_hit), .hit_score(pen_score),
    .miss_score(pen_score), .act_cnt, .act_max, .victim_valid(vmeta.valid),
    .victim_lvl(vlvl), .miss_commit(bp_commit), .pen_lvl, .avg_lvl, .l1_pass,
    .aff_lvl, .fill(bp_fill), .dec_victim(bp_dec)
  );

  // AMIL decode of the probed column and encode of updates
  logic [COL_W-1:0]   probe_col;
  row_tags_t          probe_tags, tags_q, tags_new;
  line_meta_t         probe_meta;
  logic [15:0]        probe_affs, affs_q;
  logic [1:0]         probe_aff, new_aff;
  logic [COL_W-1:0]   aff_wdata, tags_wdata, ctcwb_wdata;
  logic [COL_BYTES-1:0] aff_bmask, tags_bmask, ctcwb_bmask;
  row_tags_t          wb_tags;
  amil_codec u_amil (
    .col_data(probe_col), .line_idx(lidx), .tags(probe_tags), .meta(probe_meta),
    .affs(probe_affs), .aff(probe_aff), .aff_base(affs_q), .new_aff,
    .aff_wdata, .aff_bmask, .tags_in(tags_new), .tags_wdata, .tags_bmask
  );
  logic [COL_W-1:0] unused_a;
  logic [COL_BYTES-1:0] unused_b;
  logic [15:0] unused_c;
  line_meta_t  unused_d;
  logic [1:0]  unused_e;
  row_tags_t   unused_f;
  amil_codec u_amil_wb (
    .col_data('0), .line_idx(3'd0), .tags(unused_f), .meta(unused_d), .affs(unused_c),
    .aff(unused_e), .aff_base(16'd0), .new_aff(2'd0), .aff_wdata(unused_a),
    .aff_bmask(unused_b), .tags_in(wb_tags), .tags_wdata(ctcwb_wdata), .tags_bmask(ctcwb_bmask)
  );

  // ------------------------------------------------------------ controller
  typedef enum logic [4:0] {
    S_IDLE, S_TAG, S_CTC_WB, S_PROBE, S_PROBED, S_DECIDE,
    S_HIT_W, S_HIT_LCR, S_HIT_LCW, S_HIT_META,
    S_MISS_LCW, S_MISS_L1, S_AFF, S_MISS_L2, S_BYP_W,
    S_FILL_MERGE, S_VIC_WB, S_FILL_WR, S_STORE_META, S_STORE_AFF,
    S_FLAT_W, S_LC_W, S_DONE, S_PHASE
  } state_e;

  // column phase: one column access per set bit of mask
  typedef struct packed {
    logic [7:0]           mask;
    rank_e                rank;
    logic                 write;
    logic [1:0]           kind;
    logic [1:0]           src;    // 0: MSHR data, 1: line buffer, 2: victim buffer
    logic [DC_TAG_W-1:0]  stag;   // tag part of an SCM row
    logic                 meta;   // single access to an AMIL column
    logic [DC_ROW_W-1:0]  mrow;
    logic [COL_W-1:0]     mdata;
    logic [COL_BYTES-1:0] mmask;
    state_e               next;
  } phase_t;

  state_e       st;
  phase_t       ph;
  logic [8:0]   outst;

  logic [COL_W-1:0] linebuf [8];
  logic [COL_W-1:0] vicbuf  [8];
  logic [1:0]   lvl_q;
  logic [7:0]   lc_mask, cache_r, cache_w, all_m, wb_left;
  logic         dc_hit, need_dirty, have_aff;

  assign lc_mask    = (lidx == META_LINE) ? (8'd1 << META_COL) : 8'd0;
  assign all_m      = h_rmask | h_wmask;
  assign cache_r    = h_rmask & ~lc_mask;
  assign cache_w    = h_wmask & ~lc_mask;
  assign vmeta      = tags_q[lidx];
  assign vlvl       = affs_q[2*lidx +: 2];
  assign new_aff    = lvl_q;
  assign dc_hit     = vmeta.valid && vmeta.tag == ltag;
  assign need_dirty = (cache_w != 8'd0) && !vmeta.dirty;

  // column of the running phase: lowest set bit
  logic [2:0] pc;
  always_comb begin
    pc = 3'd0;
    for (int c = 7; c >= 0; c--) if (ph.mask[c]) pc = 3'(c);
  end

  always_comb begin
    logic [DC_ROW_W-1:0] r;
    logic [DC_TAG_W-1:0] t;
    r = ph.meta ? ph.mrow : lrow;
    t = (ph.rank == RANK_SCM) ? ph.stag : '0;
    mc_req       = '0;
    mc_req.rank  = ph.rank;
    mc_req.bank  = r[BANK_W-1:0];
    mc_req.row   = ROW_W'({t, r[DC_ROW_W-1:BANK_W]});
    mc_req.col   = ph.meta ? {META_LINE, META_COL} : {lidx, pc};
    mc_req.write = ph.write;
    mc_req.bmask = ph.meta ? ph.mmask : '1;
    mc_req.wdata = ph.meta ? ph.mdata :
                   (ph.src == 2'd0) ? h_wdata[pc] : (ph.src == 2'd1) ? linebuf[pc] : vicbuf[pc];
    mc_req.tag   = MTAG_W'({ph.kind, pc});
    mc_req.page  = lpage;
    mc_valid     = (st == S_PHASE) && (ph.mask != 8'd0);
  end

  // read responses
  logic [1:0] rk;
  logic [2:0] rc;
  assign rk = mc_rsp.tag[4:3];
  assign rc = mc_rsp.tag[2:0];
  always_comb begin
    l2_rsp_valid = mc_rsp_valid && rk == K_DEMAND;
    l2_rsp.id    = h_ids[rc];
    l2_rsp.write = 1'b0;
    l2_rsp.rdata = mc_rsp.rdata;
  end

  assign idle = (st == S_IDLE) && !h_valid && mc_idle;

  function automatic phase_t mk_phase(input logic [7:0] m, input rank_e rk_, input logic wr,
                                      input logic [1:0] kind, input logic [1:0] src,
                                      input logic [DC_TAG_W-1:0] stag, input state_e nxt);
    phase_t p;
    p = '0;
    p.mask = m; p.rank = rk_; p.write = wr; p.kind = kind; p.src = src; p.stag = stag; p.next = nxt;
    return p;
  endfunction

  function automatic phase_t mk_meta(input logic [DC_ROW_W-1:0] row, input logic wr,
                                     input logic [COL_W-1:0] d, input logic [COL_BYTES-1:0] bm,
                                     input state_e nxt);
    phase_t p;
    p = '0;
    p.mask = 8'd1; p.rank = RANK_DRAM; p.write = wr; p.kind = K_META; p.meta = 1'b1;
    p.mrow = row; p.mdata = d; p.mmask = bm; p.next = nxt;
    return p;
  endfunction

  always_comb begin
    tags_new = tags_q;
    if (st == S_HIT_META) begin
      tags_new[lidx].dirty = 1'b1;
    end else begin
      tags_new[lidx].tag   = ltag;
      tags_new[lidx].valid = 1'b1;
      tags_new[lidx].dirty = |cache_w;
    end
  end

  logic [2:0] wb_sec;
  always_comb begin
    wb_sec = 3'd0;
    for (int s = 7; s >= 0; s--) if (wb_left[s]) wb_sec = 3'(s);
    wb_tags = ctc_vtags[wb_sec];
  end

  assign take          = (st == S_IDLE) && h_valid && !h_busy;
  assign ctc_upd       = ctc_on && ((st == S_HIT_META && need_dirty) || st == S_STORE_META);
  assign ctc_upd_tags  = tags_new;
  assign ctc_fill_tags = probe_tags;
  assign ctc_fill      = ctc_on && (st == S_PROBED);
  assign bp_hit        = (st == S_DECIDE) && dc_hit;
  assign bp_commit     = (st == S_MISS_L2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= '0; outst <= '0; lvl_q <= '0; have_aff <= 1'b0;
      tags_q <= '0; affs_q <= '0; probe_col <= '0; wb_left <= '0; done <= 1'b0;
      stats <= '0;
      for (int c = 0; c < 8; c++) begin linebuf[c] <= '0; vicbuf[c] <= '0; end
    end else begin
      done <= 1'b0;
      outst <= outst + 9'(mc_valid && mc_ready) - 9'(mc_rsp_valid) - 9'(mc_wr_done);
      if (mc_rsp_valid) begin
        unique case (rk)
          K_DEMAND, K_FILL: linebuf[rc] <= mc_rsp.rdata;
          K_VICT:           vicbuf[rc]  <= mc_rsp.rdata;
          default:          probe_col   <= mc_rsp.rdata;
        endcase
      end

      unique case (st)
        S_IDLE: if (take) begin
          if (cfg_flat) begin
            // flat mode: tag 0 in DRAM, the rest in SCM; reads, then writes
            stats.flat <= stats.flat + 1;
            begin ph <= mk_phase(h_rmask, (ltag == '0) ? RANK_DRAM : RANK_SCM, 1'b0, K_DEMAND, 2'd0,
                        ltag, S_FLAT_W); st <= S_PHASE; end
          end else if (all_m == lc_mask) begin
            // only the metadata column's SCM data: never cached
            stats.lastcol <= stats.lastcol + 1;
            begin ph <= mk_phase(h_rmask, RANK_SCM, 1'b0, K_DEMAND, 2'd0, ltag, S_LC_W); st <= S_PHASE; end
          end else begin
            if ((all_m & lc_mask) != 8'd0) stats.lastcol <= stats.lastcol + 1;
            st <= S_TAG;
          end
        end

        S_FLAT_W: begin ph <= mk_phase(h_wmask, (ltag == '0) ? RANK_DRAM : RANK_SCM, 1'b1, K_DEMAND, 2'd0,
                              ltag, S_DONE); st <= S_PHASE; end
        S_LC_W:   begin ph <= mk_phase(h_wmask, RANK_SCM, 1'b1, K_DEMAND, 2'd0, ltag, S_DONE); st <= S_PHASE; end

        // ---- tag lookup
        S_TAG: begin
          if (ctc_hit) begin
            stats.ctc_hit <= stats.ctc_hit + 1;
            tags_q <= ctc_tags;
            have_aff <= 1'b0;
            st <= S_DECIDE;
          end else begin
            if (ctc_on) stats.ctc_miss <= stats.ctc_miss + 1;
            wb_left <= ctc_vdirty;
            st <= S_CTC_WB;
          end
        end

        S_CTC_WB: begin
          if (wb_left == 8'd0) st <= S_PROBE;
          else begin
            stats.ctc_wb <= stats.ctc_wb + 1;
            wb_left[wb_sec] <= 1'b0;
            begin ph <= mk_meta({ctc_vgroup, wb_sec}, 1'b1, ctcwb_wdata, ctcwb_bmask, S_CTC_WB); st <= S_PHASE; end
          end
        end

        S_PROBE: begin ph <= mk_meta(lrow, 1'b0, '0, '0, S_PROBED); st <= S_PHASE; end

        S_PROBED: begin
          tags_q <= probe_tags;
          affs_q <= probe_affs;
          have_aff <= 1'b1;
          st     <= S_DECIDE;
        end

        // ---- hit or miss
        S_DECIDE: begin
          if (dc_hit) begin
            if (cache_r != 0) stats.rd_hit <= stats.rd_hit + 1;
            if (cache_w != 0) stats.wr_hit <= stats.wr_hit + 1;
            begin ph <= mk_phase(cache_r, RANK_DRAM, 1'b0, K_DEMAND, 2'd0, '0, S_HIT_W); st <= S_PHASE; end
          end else begin
            stats.miss <= stats.miss + 1;
            // demand reads from SCM first
            begin ph <= mk_phase(h_rmask, RANK_SCM, 1'b0, K_DEMAND, 2'd0, ltag, S_MISS_LCW); st <= S_PHASE; end
          end
        end

        S_HIT_W:   begin ph <= mk_phase(cache_w, RANK_DRAM, 1'b1, K_DEMAND, 2'd0, '0, S_HIT_LCR); st <= S_PHASE; end
        S_HIT_LCR: begin ph <= mk_phase(h_rmask & lc_mask, RANK_SCM, 1'b0, K_DEMAND, 2'd0, ltag, S_HIT_LCW); st <= S_PHASE; end
        S_HIT_LCW: begin ph <= mk_phase(h_wmask & lc_mask, RANK_SCM, 1'b1, K_DEMAND, 2'd0, ltag, S_HIT_META); st <= S_PHASE; end

        S_HIT_META: begin
          if (need_dirty) tags_q <= tags_new;
          if (need_dirty && !ctc_on) begin ph <= mk_meta(lrow, 1'b1, tags_wdata, tags_bmask, S_DONE); st <= S_PHASE; end
          else st <= S_DONE;
        end

        // ---- miss: bypass decision
        S_MISS_LCW: begin ph <= mk_phase(h_wmask & lc_mask, RANK_SCM, 1'b1, K_DEMAND, 2'd0, ltag, S_MISS_L1); st <= S_PHASE; end

        S_MISS_L1: begin
          if (!l1_pass) begin
            stats.byp_l1 <= stats.byp_l1 + 1;
            st <= S_BYP_W;
          end else if (!have_aff) begin
            // the CTC holds no affinity levels: read them from the AMIL column
            stats.aff_probe <= stats.aff_probe + 1;
            begin ph <= mk_meta(lrow, 1'b0, '0, '0, S_AFF); st <= S_PHASE; end
          end else st <= S_MISS_L2;
        end

        S_AFF: begin
          affs_q <= probe_affs;
          have_aff <= 1'b1;
          st <= S_MISS_L2;
        end

        S_MISS_L2: begin
          if (bp_fill) begin
            stats.fill <= stats.fill + 1;
            lvl_q <= aff_lvl;
            begin ph <= mk_phase(~all_m & ~lc_mask, RANK_SCM, 1'b0, K_FILL, 2'd0, ltag, S_FILL_MERGE); st <= S_PHASE; end
          end else begin
            stats.byp_l2 <= stats.byp_l2 + 1;
            if (bp_dec) begin
              stats.vdec <= stats.vdec + 1;
              lvl_q <= vlvl - 2'd1;
              st <= S_STORE_AFF;
              ph.next <= S_BYP_W;
            end else st <= S_BYP_W;
          end
        end

        S_BYP_W: begin ph <= mk_phase(cache_w, RANK_SCM, 1'b1, K_DEMAND, 2'd0, ltag, S_DONE); st <= S_PHASE; end

        // ---- fill
        S_FILL_MERGE: begin
          for (int c = 0; c < 8; c++) if (cache_w[c]) linebuf[c] <= h_wdata[c];
          if (vmeta.valid && vmeta.dirty) begin
            stats.victim_wb <= stats.victim_wb + 1;
            begin ph <= mk_phase(~lc_mask, RANK_DRAM, 1'b0, K_VICT, 2'd0, '0, S_VIC_WB); st <= S_PHASE; end
          end else st <= S_FILL_WR;
        end

        S_VIC_WB:  begin ph <= mk_phase(~lc_mask, RANK_SCM, 1'b1, K_DEMAND, 2'd2, vmeta.tag, S_FILL_WR); st <= S_PHASE; end
        S_FILL_WR: begin ph <= mk_phase(~lc_mask, RANK_DRAM, 1'b1, K_DEMAND, 2'd1, '0, S_STORE_META); st <= S_PHASE; end

        S_STORE_META: begin
          tags_q <= tags_new;
          ph.next <= S_DONE;
          if (ctc_on) st <= S_STORE_AFF;
          else begin ph <= mk_meta(lrow, 1'b1, tags_wdata, tags_bmask, S_STORE_AFF); st <= S_PHASE; end
        end

        // affinity level of line lidx := lvl_q, then continue at ph.next
        S_STORE_AFF: begin
          affs_q[2*lidx +: 2] <= lvl_q;
          begin ph <= mk_meta(lrow, 1'b1, aff_wdata, aff_bmask,
                     (ph.next == S_BYP_W) ? S_BYP_W : S_DONE); st <= S_PHASE; end
        end

        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end

        S_PHASE: begin
          if (ph.mask != 0) begin
            if (mc_ready) ph.mask[pc] <= 1'b0;
          end else if (outst == 9'd0) begin
            st <= ph.next;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{pen_lvl, avg_lvl, probe_meta, probe_aff, act_shifts, mshr_occ, mc_wr_tag,
                    unused_a, unused_b, unused_c, unused_d, unused_e, unused_f};
endmodule
