// ctc: Configurable Tag Cache, built in the configurable ways of one L2 slice.
//
// Up to MAX_CTC_L2_WAYS of the 16 ways of an L2 set can be given to the tag
// cache; cfg_l2_ways (0..4) says how many.  Each 128 B L2 way holds four
// 32 B tag-cache (TC) ways, and each TC line holds eight 4 B sectors, one
// per DRAM-cache row: the row's eight 4-bit {tag, valid, dirty} line
// metadata, without the affinity levels.  A TC line therefore covers eight
// consecutive DRAM rows:
//   row group = dram_row >> 3, sector = dram_row[2:0],
//   set = row group mod N_SETS, line tag = row group / N_SETS (TAG_W bits).
// Each line has a TAG_W-bit tag and per-sector valid and dirty bits, and each
// set a 4-bit replacement state (8+8+22 bits per line, 4 bits per set, as in
// the paper).  Replacement: the first invalid enabled way, otherwise the way
// after the most recently used one (the 4-bit state is that MRU way index);
// this MRU-successor rule is this design's reading of the paper's 4-bit
// pseudo-LRU.
//
// Interface (single-ported, one operation per cycle):
//  * lookup  (combinational): lk_row -> hit (sector valid), hit_tags,
//    and the victim that a fill would replace: vict_dirty (sector dirty mask),
//    vict_tags, vict_group (its row group, for writing dirty sectors back).
//  * upd_valid:  on a hit, overwrite the sector of lk_row and mark it dirty.
//  * fill_valid: install the sector of lk_row clean; if its line is absent,
//    the victim line is replaced and its other sectors invalidated.  The
//    caller must first write back the victim's dirty sectors.
// With cfg_l2_ways = 0 nothing hits and fills are dropped.  Changing the
// configuration at run time needs a flush, which the paper leaves open and
// this block does not provide.
module ctc
  import hms_pkg::*;
#(
  parameter int N_SETS             = 512,
  parameter int MAX_CTC_L2_WAYS    = 4,
  parameter int TC_WAYS_PER_L2_WAY = 4,
  parameter int TAG_W              = 22
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           cfg_l2_ways,
  input  logic [DC_ROW_W-1:0]  lk_row,
  output logic                 hit,
  output row_tags_t            hit_tags,
  output logic [7:0]           vict_dirty,
  output row_tags_t            vict_tags [8],
  output logic [DC_ROW_W-4:0]  vict_group,
  input  logic                 upd_valid,
  input  row_tags_t            upd_tags,
  input  logic                 fill_valid,
  input  row_tags_t            fill_tags
);
  localparam int NW   = MAX_CTC_L2_WAYS * TC_WAYS_PER_L2_WAY;
  localparam int WW   = $clog2(NW);
  localparam int SW   = $clog2(N_SETS);
  localparam int GW   = DC_ROW_W - 3;

  logic [TAG_W-1:0] tg  [N_SETS][NW];
  row_tags_t        dat [N_SETS][NW][8];
  logic [7:0]       sv  [N_SETS][NW];
  logic [7:0]       sd  [N_SETS][NW];
  logic [WW-1:0]    mru [N_SETS];

  logic [GW-1:0]    grp;
  logic [SW-1:0]    set;
  logic [TAG_W-1:0] ltag;
  logic [2:0]       sec;
  logic [4:0]       n_en;

  assign grp  = lk_row[DC_ROW_W-1:3];
  assign sec  = lk_row[2:0];
  assign set  = grp[SW-1:0];
  assign ltag = TAG_W'(grp >> SW);
  assign n_en = 5'(cfg_l2_ways) * 5'(TC_WAYS_PER_L2_WAY);

  logic          line_hit, have_inv;
  logic [WW-1:0] hw, inv_w, vw;

  always_comb begin
    line_hit = 1'b0; hw = '0; have_inv = 1'b0; inv_w = '0;
    for (int w = 0; w < NW; w++) begin
      if (5'(w) < n_en) begin
        if (sv[set][w] != 8'd0 && tg[set][w] == ltag && !line_hit) begin
          line_hit = 1'b1; hw = WW'(w);
        end
        if (sv[set][w] == 8'd0 && !have_inv) begin
          have_inv = 1'b1; inv_w = WW'(w);
        end
      end
    end
    if (line_hit)      vw = hw;
    else if (have_inv) vw = inv_w;
    else if (n_en == 5'd0) vw = '0;
    else               vw = WW'((5'(mru[set]) + 5'd1) % n_en);
    hit      = line_hit && sv[set][hw][sec];
    hit_tags = dat[set][hw][sec];
    vict_dirty = (line_hit || n_en == 5'd0) ? 8'd0 : (sd[set][vw] & sv[set][vw]);
    for (int s = 0; s < 8; s++) vict_tags[s] = dat[set][vw][s];
    vict_group = GW'({tg[set][vw], set});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_SETS; i++) begin
        mru[i] <= '0;
        for (int w = 0; w < NW; w++) begin
          sv[i][w] <= '0;
          sd[i][w] <= '0;
        end
      end
    end else if (n_en != 5'd0) begin
      if (upd_valid && hit) begin
        dat[set][hw][sec] <= upd_tags;
        sd[set][hw][sec]  <= 1'b1;
        mru[set]          <= hw;
      end else if (fill_valid) begin
        dat[set][vw][sec] <= fill_tags;
        mru[set]          <= vw;
        if (line_hit) begin
          sv[set][vw][sec] <= 1'b1;
          sd[set][vw][sec] <= 1'b0;
        end else begin
          tg[set][vw] <= ltag;
          sv[set][vw] <= 8'(1) << sec;
          sd[set][vw] <= 8'd0;
        end
      end
    end
  end
endmodule
