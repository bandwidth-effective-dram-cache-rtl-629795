// tb_mem_ctrl: the channel memory controller against the device model.
// Checks read data against a reference copy of memory (byte-masked writes
// included), the row-miss latency of DRAM (about tRCD + tCL) and of MLC SCM
// (about tRCD_SCM + tCL), the row-conflict latencies (tRP + tRCD + tCL),
// the row-hit latency (about tCL), that a younger
// row hit is served before an older row miss to the same bank (FR-FCFS), and
// that the device saw no timing violation.
module tb_mem_ctrl;
  import hms_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic rv, rr, sv, wd, av, idle;
  mc_req_t rq;
  mc_rsp_t rs;
  logic [MTAG_W-1:0] wt;
  logic [PAGE_W-1:0] ap;
  dev_cmd_t dc;
  logic dv;
  logic [COL_W-1:0] dd;
  int viol, na[2], nr[2], nw[2];
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  mem_ctrl dut (.clk, .rst_n, .dram_t(DRAM_TIMING), .scm_t(SCM_MLC_T), .req_valid(rv), .req_ready(rr), .req(rq),
    .rsp_valid(sv), .rsp(rs), .wr_done(wd), .wr_done_tag(wt), .act_valid(av), .act_page(ap),
    .dev_cmd(dc), .dev_rvalid(dv), .dev_rdata(dd), .idle);
  hms_dev_model u_dev (.clk, .cmd(dc), .dram_t(DRAM_TIMING), .scm_t(SCM_MLC_T), .rvalid(dv), .rdata(dd),
    .violations(viol), .n_act(na), .n_rd(nr), .n_wr(nw));

  logic [COL_W-1:0] ref_mem [logic [1+BANK_W+ROW_W+COL_IDX_W-1:0]];
  logic [COL_W-1:0] exp_d [256];
  longint t_iss [256];
  longint lat [256];
  bit got [256];
  int order [$];

  function automatic logic [COL_W-1:0] ref_rd(input mc_req_t r);
    logic [1+BANK_W+ROW_W+COL_IDX_W-1:0] k = {r.rank, r.bank, r.row, r.col};
    if (ref_mem.exists(k)) return ref_mem[k];
    if (r.rank == RANK_SCM) return u_dev.scm_pattern({r.row[DC_ROW_W-BANK_W +: DC_TAG_W], r.row[DC_ROW_W-BANK_W-1:0], r.bank, r.col});
    return '0;
  endfunction

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic send(input rank_e rk, input int bank, input int row, input int col, input bit w,
                      input logic [31:0] bm, input logic [COL_W-1:0] d, input int tag);
    @(negedge clk);
    rq = '0; rq.rank = rk; rq.bank = BANK_W'(bank); rq.row = ROW_W'(row); rq.col = COL_IDX_W'(col);
    rq.write = w; rq.bmask = bm; rq.wdata = d; rq.tag = MTAG_W'(tag); rv = 1;
    while (!rr) @(negedge clk);
    if (w) begin
      logic [COL_W-1:0] v = ref_rd(rq);
      for (int i = 0; i < COL_BYTES; i++) if (bm[i]) v[8*i +: 8] = d[8*i +: 8];
      ref_mem[{rq.rank, rq.bank, rq.row, rq.col}] = v;
    end else begin
      exp_d[tag] = ref_rd(rq); got[tag] = 0;
    end
    t_iss[tag] = cyc;
    @(negedge clk); rv = 0;
  endtask

  always @(posedge clk) if (sv) begin
    int t;
    t = int'(rs.tag);
    lat[t] = cyc - t_iss[t]; got[t] = 1; order.push_back(t);
    checks++;
    if (rs.rdata !== exp_d[t]) begin failures++; $display("FAIL data tag %0d", t); end
  end

  task automatic wait_idle();
    repeat (4) @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (30) @(negedge clk);
  endtask

  initial begin
    rv = 0; rq = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // DRAM row miss, then row hit
    send(RANK_DRAM, 3, 100, 5, 0, '0, '0, 1); wait_idle();
    chk(got[1] && lat[1] >= 28 && lat[1] <= 33, $sformatf("DRAM row-miss latency %0d", lat[1]));
    send(RANK_DRAM, 3, 100, 6, 0, '0, '0, 2); wait_idle();
    chk(got[2] && lat[2] >= 14 && lat[2] <= 18, $sformatf("DRAM row-hit latency %0d", lat[2]));
    // DRAM row conflict: PRE + ACT + RD, about tRP + tRCD + tCL = 42 (43 ns in the paper's table)
    send(RANK_DRAM, 3, 300, 0, 0, '0, '0, 10); wait_idle();
    chk(got[10] && lat[10] >= 42 && lat[10] <= 47, $sformatf("DRAM row-conflict latency %0d", lat[10]));
    send(RANK_DRAM, 3, 100, 5, 0, '0, '0, 11); wait_idle();
    // SCM row miss
    send(RANK_SCM, 7, 1234, 0, 0, '0, '0, 3); wait_idle();
    chk(got[3] && lat[3] >= 134 && lat[3] <= 139, $sformatf("SCM row-miss latency %0d", lat[3]));
    // SCM row conflict: about 14 + 120 + 14 = 148 (149 ns in the paper's table)
    send(RANK_SCM, 7, 999, 0, 0, '0, '0, 12); wait_idle();
    chk(got[12] && lat[12] >= 148 && lat[12] <= 153, $sformatf("SCM row-conflict latency %0d", lat[12]));
    send(RANK_SCM, 7, 1234, 2, 0, '0, '0, 13); wait_idle();
    // masked write then read
    send(RANK_SCM, 7, 1234, 1, 1, 32'h0000_00FF, {8{32'hCAFE_F00D}}, 4);
    send(RANK_SCM, 7, 1234, 1, 0, '0, '0, 5); wait_idle();
    chk(got[5], "masked write read back");
    // FR-FCFS: bank 3 has row 100 open; older miss (row 200) then younger hit
    // (a write first holds the precharge for tWR, so both are queued together)
    order.delete();
    send(RANK_DRAM, 3, 100, 0, 1, '1, {8{32'h1111_2222}}, 9);
    send(RANK_DRAM, 3, 200, 0, 0, '0, '0, 6);
    send(RANK_DRAM, 3, 100, 7, 0, '0, '0, 7);
    wait_idle();
    chk(order.size() == 2 && order[0] == 7 && order[1] == 6, $sformatf("row hit served first (%p)", order));
    // random traffic
    for (int i = 0; i < 300; i++) begin
      int tg;
      tg = 16 + (i % 200);
      send(rank_e'($urandom_range(0, 1)), $urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(0, 7),
           $urandom_range(0, 1), $urandom, {8{$urandom}}, tg);
      if (i % 150 == 149) wait_idle();
    end
    wait_idle();
    chk(viol == 0, $sformatf("device timing violations %0d", viol));
    chk(na[0] > 0 && na[1] > 0 && nw[1] > 0, "both ranks used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
