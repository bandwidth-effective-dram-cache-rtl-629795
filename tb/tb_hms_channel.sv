// tb_hms_channel: one DRAM-cache channel with the device model behind it.
//
// Random 32 B reads and writes to a small address pool (so lines collide in
// the direct-mapped cache and tag-cache sets) are checked against a
// reference copy of memory: a read returns the last value written to its
// address, else the initial SCM content (or zero for DRAM-resident data in
// flat mode).  Each phase resets the channel and clears the memories, then
// runs one configuration: tag cache with 1 and 4 L2 ways, no tag cache,
// flat mode, and SLC timing with throttling and activation counters.  Every
// read must be answered exactly once, every write acknowledged, the device
// must see no timing violation, and each mechanism of the controller (tag
// cache hit/miss/write-back, affinity probe, hits, misses, both bypass
// levels, fills, victim write-back, victim level decrement, last-column
// bypass, flat mode, throttling, MSHR back-pressure) must occur.
module tb_hms_channel;
  import hms_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic cfg_flat, cfg_byp, cfg_act, thr_a, thr_w;
  logic [2:0] cfg_ways;
  scm_mode_e mode;
  logic [7:0] temp, tlim;
  logic rq_v, rq_r, rs_v, wa, thr, idle;
  l2_req_t rq;
  l2_rsp_t rs;
  logic [ID_W-1:0] wa_id;
  dev_cmd_t dc;
  logic dv;
  logic [COL_W-1:0] dd;
  chan_stats_t st;
  timing_t scm_t;
  int viol, na[2], nr[2], nw[2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hms_channel #(.MSHR_ENTRIES(8), .CTC_SETS(4)) dut (
    .clk, .rst_n, .cfg_flat, .cfg_ctc_ways(cfg_ways), .cfg_bypass_en(cfg_byp), .cfg_act_en(cfg_act),
    .cfg_scm_mode(mode), .temp, .temp_limit(tlim), .cfg_throttle_act(thr_a), .cfg_throttle_wr(thr_w),
    .l2_req_valid(rq_v), .l2_req_ready(rq_r), .l2_req(rq), .l2_rsp_valid(rs_v), .l2_rsp(rs),
    .wr_ack(wa), .wr_ack_id(wa_id), .dev_cmd(dc), .dev_rvalid(dv), .dev_rdata(dd),
    .throttling(thr), .idle, .stats(st));
  assign scm_t = dut.scm_t;
  hms_dev_model u_dev (.clk, .cmd(dc), .dram_t(DRAM_TIMING), .scm_t, .rvalid(dv), .rdata(dd),
    .violations(viol), .n_act(na), .n_rd(nr), .n_wr(nw));

  logic [COL_W-1:0] ref_mem [logic [SEC_ADDR_W-1:0]];
  logic [COL_W-1:0] exp_d [256];
  bit pend [256];
  int n_pend = 0, n_wr_sent = 0, n_wr_ack = 0, n_stall = 0, n_thr = 0;
  chan_stats_t tot;

  function automatic logic [COL_W-1:0] ref_rd(input logic [SEC_ADDR_W-1:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    if (cfg_flat && a[SEC_ADDR_W-1 -: DC_TAG_W] == '0) return '0;
    return u_dev.scm_pattern(a);
  endfunction

  always @(posedge clk) begin
    if (rs_v) begin
      int id;
      id = int'(rs.id);
      checks++;
      if (!pend[id]) begin failures++; $display("FAIL response to id %0d not pending", id); end
      else if (rs.rdata !== exp_d[id]) begin failures++; $display("FAIL data id %0d", id); end
      pend[id] = 0; n_pend--;
    end
    if (wa) n_wr_ack++;
    if (rq_v && !rq_r) n_stall++;
    if (thr) n_thr++;
  end

  function automatic logic [SEC_ADDR_W-1:0] rnd_addr();
    int g, r, t, l;
    g = $urandom_range(0, 5);            // tag-cache groups that all map to set 0
    r = g * 4 * 8 + $urandom_range(0, 1);
    t = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 3) : $urandom_range(0, 1);
    l = ($urandom_range(0, 7) == 0) ? 7 : $urandom_range(0, 2);
    return {DC_TAG_W'(t), DC_ROW_W'(r), 3'(l), 3'($urandom_range(0, 3))};
  endfunction

  int next_id = 0;
  task automatic send(input bit w, input logic [SEC_ADDR_W-1:0] a);
    @(negedge clk);
    while (pend[next_id]) next_id = (next_id + 1) % 256;
    rq.write = w; rq.addr = a; rq.id = ID_W'(next_id); rq.wdata = {8{$urandom}}; rq_v = 1;
    #4;
    while (!rq_r) begin @(negedge clk); #4; end
    if (w) begin ref_mem[a] = rq.wdata; n_wr_sent++; end
    else begin exp_d[next_id] = ref_rd(a); pend[next_id] = 1; n_pend++; end
    next_id = (next_id + 1) % 256;
    @(negedge clk); rq_v = 0;
  endtask

  task automatic phase(input string name, input bit flat, input int ways, input scm_mode_e m,
                       input bit byp, input bit act, input bit hot, input int n);
    // let the last SCM write recover (tWR) before the reset forgets it
    repeat (3000) @(negedge clk);
    rst_n = 0;
    cfg_flat = flat; cfg_ways = 3'(ways); mode = m; cfg_byp = byp; cfg_act = act;
    temp = hot ? 8'd95 : 8'd40; tlim = 8'd85; thr_a = 1; thr_w = 1;
    ref_mem.delete(); u_dev.mem.delete();
    // the controller forgets its open rows on reset: close them in the model too
    for (int r = 0; r < 2; r++) for (int b = 0; b < N_BANKS; b++) u_dev.open_[r][b] = 1'b0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < n; i++) send($urandom_range(0, 2) == 0, rnd_addr());
    // a few requests to the never-cached last column
    for (int i = 0; i < 4; i++) send(i[0], {DC_TAG_W'(1), DC_ROW_W'(i), 3'd7, 3'd7});
    repeat (5) @(negedge clk);
    for (int k = 0; k < 200000 && !(idle && n_pend == 0); k++) @(negedge clk);
    checks++;
    if (n_pend != 0 || !idle) begin failures++; $display("FAIL %s: %0d reads unanswered", name, n_pend); end
    $display("%s: ctc hit %0d miss %0d wb %0d | aff %0d | hit r %0d w %0d | miss %0d byp1 %0d byp2 %0d fill %0d vwb %0d vdec %0d | lc %0d flat %0d",
             name, st.ctc_hit, st.ctc_miss, st.ctc_wb, st.aff_probe, st.rd_hit, st.wr_hit, st.miss, st.byp_l1,
             st.byp_l2, st.fill, st.victim_wb, st.vdec, st.lastcol, st.flat);
    tot.ctc_hit += st.ctc_hit; tot.ctc_miss += st.ctc_miss; tot.ctc_wb += st.ctc_wb; tot.aff_probe += st.aff_probe;
    tot.rd_hit += st.rd_hit; tot.wr_hit += st.wr_hit; tot.miss += st.miss; tot.byp_l1 += st.byp_l1;
    tot.byp_l2 += st.byp_l2; tot.fill += st.fill; tot.victim_wb += st.victim_wb; tot.vdec += st.vdec;
    tot.lastcol += st.lastcol; tot.flat += st.flat;
  endtask

  task automatic need(input string what, input longint n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    rq_v = 0; rq = '0; tot = '0;
    cfg_flat = 0; cfg_ways = 1; mode = SCM_MLC; cfg_byp = 1; cfg_act = 0; temp = 40; tlim = 85; thr_a = 1; thr_w = 1;
    for (int i = 0; i < 256; i++) pend[i] = 0;
    phase("ctc1", 0, 1, SCM_MLC, 1, 0, 0, 600);
    phase("ctc4", 0, 4, SCM_MLC, 1, 0, 0, 300);
    phase("noctc", 0, 0, SCM_MLC, 1, 0, 0, 300);
    phase("flat", 1, 4, SCM_MLC, 1, 0, 0, 200);
    phase("slc_hot_act", 0, 2, SCM_SLC, 1, 1, 1, 300);
    phase("nobypass", 0, 1, SCM_TLC, 0, 0, 0, 200);
    checks++;
    if (viol != 0) begin failures++; $display("FAIL device timing violations %0d", viol); end
    checks++;
    if (n_wr_ack != n_wr_sent) begin failures++; $display("FAIL write acks %0d of %0d", n_wr_ack, n_wr_sent); end
    need("tag-cache hit", tot.ctc_hit);       need("tag-cache miss", tot.ctc_miss);
    need("tag-cache write-back", tot.ctc_wb); need("affinity probe", tot.aff_probe);
    need("read hit", tot.rd_hit);             need("write hit", tot.wr_hit);
    need("miss", tot.miss);                   need("level-1 bypass", tot.byp_l1);
    need("level-2 bypass", tot.byp_l2);       need("fill", tot.fill);
    need("victim write-back", tot.victim_wb); need("victim level decrement", tot.vdec);
    need("last-column bypass", tot.lastcol);  need("flat mode", tot.flat);
    need("throttling", n_thr);                need("MSHR back-pressure", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
