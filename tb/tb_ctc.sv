// tb_ctc: tag-cache hits per sector, line sharing by 8 rows, replacement
// of the way after the most recently used one, dirty-sector reporting of
// the victim, configurations of 1 and 0 L2 ways.
module tb_ctc;
  import hms_pkg::*;
  localparam int NS = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic [2:0] cfg;
  logic [DC_ROW_W-1:0] row;
  logic hit, upd, fil;
  row_tags_t ht, ut, ft;
  logic [7:0] vd;
  row_tags_t vt [8];
  logic [DC_ROW_W-4:0] vg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ctc #(.N_SETS(NS)) dut (.clk, .rst_n, .cfg_l2_ways(cfg), .lk_row(row), .hit, .hit_tags(ht),
    .vict_dirty(vd), .vict_tags(vt), .vict_group(vg), .upd_valid(upd), .upd_tags(ut),
    .fill_valid(fil), .fill_tags(ft));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s hit=%0d vd=%b vg=%0d", s, hit, vd, vg); end
  endtask
  // row of (line tag t, set s, sector k)
  function automatic logic [DC_ROW_W-1:0] R(input int t, input int s, input int k);
    return DC_ROW_W'((t * NS + s) * 8 + k);
  endfunction
  task automatic do_fill(input logic [DC_ROW_W-1:0] r, input row_tags_t d);
    @(negedge clk); row = r; ft = d; fil = 1; @(negedge clk); fil = 0;
  endtask
  task automatic do_upd(input logic [DC_ROW_W-1:0] r, input row_tags_t d);
    @(negedge clk); row = r; ut = d; upd = 1; @(negedge clk); upd = 0;
  endtask
  initial begin
    cfg = 1; row = 0; upd = 0; fil = 0; ut = '0; ft = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    row = R(1, 2, 3); #1; chk(!hit && vd == 0, "cold miss");
    do_fill(R(1, 2, 3), row_tags_t'(32'h1234_5678));
    row = R(1, 2, 3); #1; chk(hit && ht == row_tags_t'(32'h1234_5678), "hit after fill");
    row = R(1, 2, 4); #1; chk(!hit, "other sector of the line not valid");
    do_fill(R(1, 2, 4), row_tags_t'(32'hAAAA_5555));
    row = R(1, 2, 3); #1; chk(hit && ht == row_tags_t'(32'h1234_5678), "first sector kept");
    do_upd(R(1, 2, 3), row_tags_t'(32'hDEAD_BEEF));
    row = R(1, 2, 3); #1; chk(hit && ht == row_tags_t'(32'hDEAD_BEEF), "update");
    // fill three more lines of set 2: ways 1,2,3
    do_fill(R(2, 2, 0), row_tags_t'(32'h2));
    do_fill(R(3, 2, 0), row_tags_t'(32'h3));
    do_fill(R(4, 2, 0), row_tags_t'(32'h4));
    // MRU is way 3 -> victim is way 0, the line of tag 1 with sector 3 dirty
    row = R(5, 2, 0); #1;
    chk(!hit && vd == 8'b0000_1000 && vg == 15'(1 * NS + 2) && vt[3] == row_tags_t'(32'hDEAD_BEEF), "dirty victim");
    do_fill(R(5, 2, 0), row_tags_t'(32'h5));
    row = R(1, 2, 3); #1; chk(!hit, "victim evicted");
    row = R(2, 2, 0); #1; chk(hit && ht == row_tags_t'(32'h2), "others kept");
    row = R(5, 2, 0); #1; chk(hit && ht == row_tags_t'(32'h5), "new line");
    // other set unaffected
    row = R(1, 1, 0); #1; chk(!hit && vd == 0, "other set empty");
    // no CTC ways: nothing hits, fills dropped
    cfg = 0; row = R(2, 2, 0); #1; chk(!hit, "cfg 0 no hit");
    do_fill(R(7, 3, 0), row_tags_t'(32'h7));
    cfg = 1; row = R(7, 3, 0); #1; chk(!hit, "cfg 0 fill dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
