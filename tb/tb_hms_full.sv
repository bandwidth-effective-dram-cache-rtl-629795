// tb_hms_full: end-to-end test of the HMS memory system, with every parameter at its
// default: 8 channels, 128-entry MSHRs, 512-set tag caches.
//
// Every channel gets its own device model and its own random stream of 32 B
// reads and writes over a small address pool, driven concurrently.  Reads
// are checked against a reference copy of memory (last value written, else
// the initial SCM content, or zero for DRAM-resident data in flat mode);
// every read must be answered once and every write acknowledged; the device
// models must see no timing violation.  Tag-cache hits and misses, DRAM-cache hits, misses,
// fills, the last-column bypass and throttling of the hot channel must occur.
module tb_hms_full;
  import hms_pkg::*;
  localparam int NCH = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic cfg_flat, cfg_byp, cfg_act, thr_a, thr_w;
  logic [2:0] cfg_ways;
  scm_mode_e mode;
  logic [7:0] tlim;
  logic [7:0] temp [NCH];
  logic rq_v [NCH], rq_r [NCH], rs_v [NCH], wa [NCH], thr [NCH];
  l2_req_t rq [NCH];
  l2_rsp_t rs [NCH];
  logic [ID_W-1:0] wa_id [NCH];
  dev_cmd_t dc [NCH];
  logic dv [NCH];
  logic [COL_W-1:0] dd [NCH];
  chan_stats_t st [NCH];
  logic idle;
  int viol [NCH];
  int checks = 0, failures = 0;
  event clear_ev;
  always #5 clk = ~clk;

  hms_top dut (
    .clk, .rst_n, .cfg_flat, .cfg_ctc_ways(cfg_ways), .cfg_bypass_en(cfg_byp), .cfg_act_en(cfg_act),
    .cfg_scm_mode(mode), .cfg_throttle_act(thr_a), .cfg_throttle_wr(thr_w), .temp_limit(tlim), .temp,
    .l2_req_valid(rq_v), .l2_req_ready(rq_r), .l2_req(rq), .l2_rsp_valid(rs_v), .l2_rsp(rs),
    .wr_ack(wa), .wr_ack_id(wa_id), .dev_cmd(dc), .dev_rvalid(dv), .dev_rdata(dd),
    .throttling(thr), .idle, .stats(st));

  for (genvar c = 0; c < NCH; c++) begin : g_dev
    int na[2], nr[2], nw[2];
    hms_dev_model u_dev (.clk, .cmd(dc[c]), .dram_t(DRAM_TIMING), .scm_t(dut.g_ch[c].u_ch.scm_t),
      .rvalid(dv[c]), .rdata(dd[c]), .violations(viol[c]), .n_act(na), .n_rd(nr), .n_wr(nw));
    always @(clear_ev) begin
      u_dev.mem.delete();
      for (int r = 0; r < 2; r++) for (int b = 0; b < N_BANKS; b++) u_dev.open_[r][b] = 1'b0;
    end
  end

  // initial SCM content, the same formula as the device model's
  function automatic logic [COL_W-1:0] scm_pattern(input logic [SEC_ADDR_W-1:0] a);
    logic [COL_W-1:0] v;
    for (int i = 0; i < COL_W / 32; i++) v[32*i +: 32] = {a[23:0] ^ 24'(i * 24'h9E3779), 8'(i)} ^ 32'hA5A5_0000;
    return v;
  endfunction

  logic [COL_W-1:0] ref_mem [logic [3+SEC_ADDR_W-1:0]];
  logic [COL_W-1:0] exp_d [NCH][256];
  bit pend [NCH][256];
  int n_pend [NCH];
  int n_wr_sent = 0, n_wr_ack = 0, n_stall = 0, n_thr = 0;
  longint tot [14];

  function automatic logic [COL_W-1:0] ref_rd(input int c, input logic [SEC_ADDR_W-1:0] a);
    if (ref_mem.exists({3'(c), a})) return ref_mem[{3'(c), a}];
    if (cfg_flat && a[SEC_ADDR_W-1 -: DC_TAG_W] == '0) return '0;
    return scm_pattern(a);
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      if (rs_v[c]) begin
        int id;
        id = int'(rs[c].id);
        checks++;
        if (!pend[c][id]) begin failures++; $display("FAIL ch%0d response to id %0d not pending", c, id); end
        else if (rs[c].rdata !== exp_d[c][id]) begin failures++; $display("FAIL ch%0d data id %0d", c, id); end
        pend[c][id] = 0; n_pend[c]--;
      end
      if (wa[c]) n_wr_ack++;
      if (rq_v[c] && !rq_r[c]) n_stall++;
      if (thr[c]) n_thr++;
    end
  end

  function automatic logic [SEC_ADDR_W-1:0] rnd_addr();
    int g, r, t, l;
    g = $urandom_range(0, 5);            // rows whose tag-cache lines share one set
    r = g * 512 * 8 + $urandom_range(0, 1);
    t = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 3) : $urandom_range(0, 1);
    l = ($urandom_range(0, 7) == 0) ? 7 : $urandom_range(0, 2);
    return {DC_TAG_W'(t), DC_ROW_W'(r), 3'(l), 3'($urandom_range(0, 3))};
  endfunction

  task automatic drive(input int c, input int n);
    int nid = 0;
    for (int i = 0; i < n + 2; i++) begin
      logic [SEC_ADDR_W-1:0] a;
      bit w;
      a = (i >= n) ? {DC_TAG_W'(1), DC_ROW_W'(c), 3'd7, 3'd7} : rnd_addr();   // last: metadata column
      w = (i >= n) ? bit'(i - n) : ($urandom_range(0, 2) == 0);
      @(negedge clk);
      while (pend[c][nid]) nid = (nid + 1) % 256;
      rq[c].write = w; rq[c].addr = a; rq[c].id = ID_W'(nid); rq[c].wdata = {8{$urandom}}; rq_v[c] = 1;
      #4;
      while (!rq_r[c]) begin @(negedge clk); #4; end
      if (w) begin ref_mem[{3'(c), a}] = rq[c].wdata; n_wr_sent++; end
      else begin exp_d[c][nid] = ref_rd(c, a); pend[c][nid] = 1; n_pend[c]++; end
      nid = (nid + 1) % 256;
      @(negedge clk); rq_v[c] = 0;
    end
  endtask

  task automatic run_phase(input string name, input bit flat, input int n);
    int busy;
    repeat (3000) @(negedge clk);
    rst_n = 0; cfg_flat = flat;
    ->clear_ev; ref_mem.delete();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      automatic int cc = c;
      fork drive(cc, n); join_none
    end
    wait fork;
    repeat (5) @(negedge clk);
    for (int k = 0; k < 400000; k++) begin
      busy = 0;
      for (int c = 0; c < NCH; c++) busy += n_pend[c];
      if (idle && busy == 0) break;
      @(negedge clk);
    end
    checks++;
    if (busy != 0 || !idle) begin failures++; $display("FAIL %s: %0d reads unanswered", name, busy); end
    for (int c = 0; c < NCH; c++) begin
      tot[0] += st[c].ctc_hit;  tot[1] += st[c].ctc_miss; tot[2] += st[c].ctc_wb;   tot[3] += st[c].aff_probe;
      tot[4] += st[c].rd_hit;   tot[5] += st[c].wr_hit;   tot[6] += st[c].miss;     tot[7] += st[c].byp_l1;
      tot[8] += st[c].byp_l2;   tot[9] += st[c].fill;     tot[10] += st[c].victim_wb; tot[11] += st[c].vdec;
      tot[12] += st[c].lastcol; tot[13] += st[c].flat;
    end
    $display("%s done at cycle %0t", name, $time / 10);
  endtask

  task automatic need(input string what, input longint n);
    checks++;
    $display("  %-24s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    cfg_flat = 0; cfg_ways = 3'd1; mode = SCM_MLC; cfg_byp = 1; cfg_act = 1; thr_a = 1; thr_w = 1; tlim = 8'd85;
    for (int c = 0; c < NCH; c++) begin
      temp[c] = (c == NCH - 1) ? 8'd95 : 8'd40;    // the last channel's stack runs hot
      rq_v[c] = 0; rq[c] = '0; n_pend[c] = 0;
      for (int i = 0; i < 256; i++) pend[c][i] = 0;
    end
    for (int i = 0; i < 14; i++) tot[i] = 0;
    run_phase("cache", 0, 120);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (viol[c] != 0) begin failures++; $display("FAIL ch%0d device timing violations %0d", c, viol[c]); end
    end
    checks++;
    if (n_wr_ack != n_wr_sent) begin failures++; $display("FAIL write acks %0d of %0d", n_wr_ack, n_wr_sent); end
    need("tag-cache hit", tot[0]);       need("tag-cache miss", tot[1]);
    need("read hit", tot[4]);            need("miss", tot[6]);
    need("fill", tot[9]);                need("last-column bypass", tot[12]);
    need("throttling", n_thr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
