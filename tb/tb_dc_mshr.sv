// tb_dc_mshr: merging of requests to one line, hold on a repeated column,
// allocation up to the entry count, in-order release and write data.
module tb_dc_mshr;
  import hms_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic iv, ir, wa, hv, hb, take, done;
  l2_req_t rq;
  logic [ID_W-1:0] wid;
  logic [LINE_ADDR_W-1:0] hl;
  logic [7:0] hr, hw;
  logic [ID_W-1:0] hi [8];
  logic [COL_W-1:0] hd [8];
  logic [$clog2(N+1)-1:0] occ;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dc_mshr #(.N_ENTRIES(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_req(rq), .wr_ack(wa),
    .wr_ack_id(wid), .head_valid(hv), .head_busy(hb), .head_line(hl), .head_rmask(hr), .head_wmask(hw),
    .head_ids(hi), .head_wdata(hd), .take, .done, .occupancy(occ));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s occ=%0d ir=%0d hr=%b hw=%b", s, occ, ir, hr, hw); end
  endtask
  // push; returns whether it was accepted in one cycle
  task automatic push(input bit w, input int line, input int col, input int id, output bit acc);
    @(negedge clk); rq.write = w; rq.addr = SEC_ADDR_W'(line * 8 + col); rq.id = ID_W'(id);
    rq.wdata = {8{32'(id * 1000 + col)}}; iv = 1; #1; acc = ir; @(negedge clk); iv = 0;
  endtask
  initial begin
    bit a;
    iv = 0; take = 0; done = 0; rq = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    push(0, 10, 1, 1, a); chk(a && occ == 1, "first");
    push(0, 10, 5, 2, a); chk(a && occ == 1, "merge read");
    push(1, 10, 6, 3, a); chk(a && occ == 1 && wa, "merge write, posted ack");
    push(0, 10, 5, 4, a); chk(!a, "same column held");
    push(0, 11, 0, 5, a); chk(a && occ == 2, "second line");
    push(0, 12, 0, 6, a); push(0, 13, 0, 7, a); chk(a && occ == 4, "full");
    push(0, 14, 0, 8, a); chk(!a, "no entry left");
    push(0, 13, 2, 9, a); chk(a && occ == 4, "merge while full");
    #1; chk(hv && hl == 23'(10) && hr == 8'b0010_0010 && hw == 8'b0100_0000 && hi[1] == 1 && hi[5] == 2 &&
            hd[6] == {8{32'(3006)}}, "head fields");
    @(negedge clk); take = 1; @(negedge clk); take = 0;
    push(0, 10, 5, 4, a); chk(!a, "busy head does not merge; full");
    push(0, 10, 3, 10, a); chk(!a && occ == 4, "busy head takes no new column");
    @(negedge clk); done = 1; @(negedge clk); done = 0; #1;
    chk(hv && hl == 23'(11) && occ == 3, "in order");
    push(0, 10, 5, 4, a); chk(a && occ == 4, "new entry for line 10");
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); take = 1; @(negedge clk); take = 0; done = 1; @(negedge clk); done = 0;
    end
    #1; chk(hl == 23'(10) && hr == 8'b0010_0000 && hi[5] == 4 && occ == 1, "last entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
