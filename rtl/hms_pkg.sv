// hms_pkg: constants and types shared by the DRAM-cache controller of a
// Heterogeneous Memory Stack (HMS) channel.
//
// One channel carries two ranks on one bus: rank 0 is the DRAM cache, rank 1
// the storage-class memory (SCM, phase-change memory).  Data moves in 32 B
// columns (128-bit bus, burst length 2, DDR), a DRAM-cache line is 256 B
// (8 columns), a row is 2 KiB (8 lines, 64 columns).  The cache is
// direct-mapped and the SCM rank holds 4x the DRAM rank, so the cache tag is
// 2 bits.  These numbers, the timing values and the SLC/MLC/TLC variants follow
// the paper's configuration tables.
//
// Addresses inside a channel are 32 B-column ("sector") addresses, split as
//   {tag[1:0], dram_row[17:0], line[2:0], col[2:0]}
// with the bank in dram_row[3:0].  The same row index, prefixed by the tag,
// is the SCM row, so one DRAM row caches lines of four SCM rows.  This split,
// the 512 MiB of DRAM per channel it implies (a 40-channel GPU with 20 GiB of
// DRAM cache), and the 2 MiB activation-counter page, are this design's
// choices built on the paper's numbers.
package hms_pkg;

  localparam int COL_W         = 256;  // 32 B column
  localparam int COL_BYTES     = 32;
  localparam int COLS_PER_LINE = 8;    // 256 B line
  localparam int LINES_PER_ROW = 8;    // 2 KiB row
  localparam int DC_TAG_W      = 2;    // SCM = 4 x DRAM, direct mapped
  localparam int N_LEVELS      = 4;
  localparam int LVL_W         = 2;
  localparam int BANK_W        = 4;    // 4 bank groups x 4 banks
  localparam int N_BANKS       = 16;
  localparam int DC_ROW_W      = 18;   // DRAM rows per channel (all banks)
  localparam int ROW_W         = 16;   // row-in-bank field, wide enough for SCM
  localparam int COL_IDX_W     = 6;    // column within a 2 KiB row
  localparam int SEC_ADDR_W    = DC_TAG_W + DC_ROW_W + 6;  // 26
  localparam int LINE_ADDR_W   = SEC_ADDR_W - 3;           // 23
  localparam int PAGE_W        = 10;   // 2 MiB pages of a 2 GiB SCM rank
  localparam int ID_W          = 8;    // L2 request identifier
  localparam int MTAG_W        = 8;    // memory-controller request tag
  localparam int TIME_W        = 16;
  localparam logic [2:0] META_LINE = 3'd7;  // line holding the AMIL column
  localparam logic [2:0] META_COL  = 3'd7;  // its last column

  // Metadata of one 256 B line, 4 bits (Fig. "AMIL": tag, dirty, valid 8x4b)
  typedef struct packed {
    logic [DC_TAG_W-1:0] tag;
    logic                valid;
    logic                dirty;
  } line_meta_t;

  // Tags of a whole row: the 4 B tag-cache sector
  typedef line_meta_t [LINES_PER_ROW-1:0] row_tags_t;

  typedef enum logic [2:0] {CMD_NOP, CMD_ACT, CMD_RD, CMD_WR, CMD_PRE} cmd_e;
  typedef enum logic [1:0] {SCM_SLC, SCM_MLC, SCM_TLC} scm_mode_e;
  typedef enum logic       {RANK_DRAM = 1'b0, RANK_SCM = 1'b1} rank_e;

  typedef struct packed {
    logic [TIME_W-1:0] cl;
    logic [TIME_W-1:0] rcd;
    logic [TIME_W-1:0] ras;
    logic [TIME_W-1:0] wr;
    logic [TIME_W-1:0] rp;
  } timing_t;

  localparam timing_t DRAM_TIMING = '{cl: 16'd14, rcd: 16'd14, ras: 16'd33, wr: 16'd16, rp: 16'd14};
  localparam timing_t SCM_MLC_T   = '{cl: 16'd14, rcd: 16'd120, ras: 16'd120, wr: 16'd1000, rp: 16'd14};
  localparam timing_t SCM_SLC_T   = '{cl: 16'd14, rcd: 16'd60,  ras: 16'd60,  wr: 16'd150,  rp: 16'd14};
  localparam timing_t SCM_TLC_T   = '{cl: 16'd14, rcd: 16'd250, ras: 16'd250, wr: 16'd2350, rp: 16'd14};

  // Column request to the memory controller
  typedef struct packed {
    rank_e                 rank;
    logic [BANK_W-1:0]     bank;
    logic [ROW_W-1:0]      row;
    logic [COL_IDX_W-1:0]  col;
    logic                  write;
    logic [COL_BYTES-1:0]  bmask;   // byte enables of a write (data mask)
    logic [COL_W-1:0]      wdata;
    logic [MTAG_W-1:0]     tag;
    logic [PAGE_W-1:0]     page;    // page charged when this request opens a row
  } mc_req_t;

  typedef struct packed {
    logic [MTAG_W-1:0] tag;
    logic [COL_W-1:0]  rdata;
  } mc_rsp_t;

  // Command on the channel's shared bus
  typedef struct packed {
    cmd_e                  cmd;
    rank_e                 rank;
    logic [BANK_W-1:0]     bank;
    logic [ROW_W-1:0]      row;
    logic [COL_IDX_W-1:0]  col;
    logic [COL_BYTES-1:0]  bmask;
    logic [COL_W-1:0]      wdata;
  } dev_cmd_t;

  // Request from an L2 slice: one 32 B sector
  typedef struct packed {
    logic                  write;
    logic [SEC_ADDR_W-1:0] addr;
    logic [COL_W-1:0]      wdata;
    logic [ID_W-1:0]       id;
  } l2_req_t;

  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic             write;   // write acknowledgement when set
    logic [COL_W-1:0] rdata;
  } l2_rsp_t;

  // Event counters of one channel
  typedef struct packed {
    logic [31:0] ctc_hit;      // tag-cache hits
    logic [31:0] ctc_miss;     // tag-cache misses (each costs one AMIL probe)
    logic [31:0] ctc_wb;       // dirty tag sectors written back
    logic [31:0] aff_probe;    // AMIL reads for the victim's affinity level
    logic [31:0] rd_hit;       // DRAM-cache line hits with reads
    logic [31:0] wr_hit;       // DRAM-cache line hits with writes
    logic [31:0] miss;         // DRAM-cache line misses
    logic [31:0] byp_l1;       // bypassed by the penalty-level comparison
    logic [31:0] byp_l2;       // bypassed by the affinity-level comparison
    logic [31:0] fill;         // lines filled from SCM
    logic [31:0] victim_wb;    // dirty victims written back to SCM
    logic [31:0] vdec;         // victim affinity levels decremented
    logic [31:0] lastcol;      // accesses to the never-cached last column
    logic [31:0] flat;         // lines served in flat (DRAM-as-memory) mode
  } chan_stats_t;

endpackage
