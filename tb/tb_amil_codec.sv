// tb_amil_codec: checks decoding of the AMIL column and the two masked
// update writes against bit positions computed independently here.
module tb_amil_codec;
  import hms_pkg::*;
  logic [COL_W-1:0] col;
  logic [2:0] li;
  row_tags_t tags, tags_in;
  line_meta_t meta;
  logic [15:0] affs, aff_base;
  logic [1:0] aff, new_aff;
  logic [COL_W-1:0] aw, tw;
  logic [COL_BYTES-1:0] am, tm;
  int checks = 0, failures = 0;

  amil_codec dut (.col_data(col), .line_idx(li), .tags, .meta, .affs, .aff, .aff_base, .new_aff,
                  .aff_wdata(aw), .aff_bmask(am), .tags_in, .tags_wdata(tw), .tags_bmask(tm));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int w = 0; w < 8; w++) col[32*w +: 32] = $urandom;
      li = 3'($urandom); aff_base = 16'($urandom); new_aff = 2'($urandom);
      tags_in = row_tags_t'($urandom);
      #1;
      // line i nibble at bits 4i+3..4i = {tag[1:0], valid, dirty}
      chk(meta.tag   == col[4*li+2 +: 2], "tag");
      chk(meta.valid == col[4*li+1], "valid");
      chk(meta.dirty == col[4*li], "dirty");
      chk(aff == col[32 + 2*li +: 2], "aff");
      chk(tm == 32'h0000000F && tw[31:0] == 32'(tags_in) && tw[255:32] == '0, "tag write");
      chk(am == 32'h00000030, "aff mask");
      for (int j = 0; j < 8; j++)
        chk(aw[32 + 2*j +: 2] == ((j == int'(li)) ? new_aff : aff_base[2*j +: 2]), "aff write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
