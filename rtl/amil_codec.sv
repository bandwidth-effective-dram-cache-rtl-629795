// amil_codec: field access to the Aggregated Metadata-In-Last-column (AMIL).
//
// In the AMIL organisation all metadata of a 2 KiB DRAM-cache row sits in the
// 32 B data portion of the row's last column, so one column read fetches the
// tags of all 8 lines and the ECC bits of the column stay ECC.  The paper fixes
// the content (8 x 4 bit tag/valid/dirty and 8 x 2 bit DRAM-affinity levels,
// 48 bits); the placement inside the column is this design's choice:
//   bytes 0-3 : row_tags_t, line i in bits [4i+3:4i] = {tag[1:0], valid, dirty}
//   bytes 4-5 : affinity level of line i in bits [32+2i+1:32+2i]
//   bytes 6-31: unused, written as zero
// The tags occupy whole bytes of their own, so the tag-cache sector (which
// omits the affinity levels) and the affinity levels can each be written back
// with a byte-masked column write that leaves the other field untouched.
//
// Purely combinational.  Inputs: a column read from DRAM, a line index, the
// row's tags and affinity levels to write.  Outputs: the decoded fields of the
// selected line and the data/byte-mask pairs of the two update writes.
module amil_codec
  import hms_pkg::*;
(
  input  logic [COL_W-1:0]     col_data,    // last column as read
  input  logic [2:0]           line_idx,
  output row_tags_t            tags,        // all 8 lines' tag/valid/dirty
  output line_meta_t           meta,        // selected line
  output logic [2*LINES_PER_ROW-1:0] affs,  // all 8 affinity levels
  output logic [LVL_W-1:0]     aff,         // selected line's level
  // update of the selected line's affinity level
  input  logic [2*LINES_PER_ROW-1:0] aff_base,
  input  logic [LVL_W-1:0]     new_aff,
  output logic [COL_W-1:0]     aff_wdata,
  output logic [COL_BYTES-1:0] aff_bmask,
  // write-back of a whole tag sector
  input  row_tags_t            tags_in,
  output logic [COL_W-1:0]     tags_wdata,
  output logic [COL_BYTES-1:0] tags_bmask
);
  logic [2*LINES_PER_ROW-1:0] aff_new_all;

  always_comb begin
    tags = row_tags_t'(col_data[31:0]);
    meta = tags[line_idx];
    affs = col_data[32 +: 2*LINES_PER_ROW];
    aff  = affs[2*line_idx +: 2];

    aff_new_all = aff_base;
    aff_new_all[2*line_idx +: 2] = new_aff;
    aff_wdata = '0;
    aff_wdata[32 +: 2*LINES_PER_ROW] = aff_new_all;
    aff_bmask = 32'h0000_0030;

    tags_wdata = '0;
    tags_wdata[31:0] = tags_in;
    tags_bmask = 32'h0000_000F;
  end
endmodule
