// mem_ctrl: memory controller of one HMS channel.
//
// The channel bus is shared by two ranks: the DRAM cache (rank 0) and the
// SCM (rank 1), each with 16 banks (4 bank groups x 4 banks), 2 KiB rows and
// 32 B columns; one column moves per bus cycle (128-bit bus, BL2, DDR at
// 1 GHz).  Column requests wait in a QDEPTH-entry queue and are scheduled
// first-ready, first-come-first-served (FR-FCFS): the oldest request that
// hits an open row and is ready issues its RD/WR; otherwise the oldest
// request that can make progress issues an ACT to its closed bank or a PRE to
// a bank open on another row that no queued request still hits.  Rows stay
// open after use (open-page).  Per bank the controller enforces
//   ACT -> RD/WR  >= tRCD     ACT -> PRE >= tRAS
//   WR  -> PRE    >= tWR      PRE -> ACT >= tRP
// with the DRAM timing set for rank 0 and the (mode / throttle dependent)
// SCM timing set for rank 1.  Read data comes back from the device tCL
// cycles after RD on dev_rvalid and is returned in order with the request's
// tag.  Writes carry a byte mask (the device's data mask) and are reported
// on wr_done when their WR issues.  Each ACT is reported with the page of the
// request that caused it, for the activation counters.
//
// The FR-FCFS policy, the two ranks on one bus and the timing values follow
// the paper; the queue depth, the open-page policy and the omission of
// refresh, tCCD, tFAW, tRTP and bus turnaround are this design's
// simplifications.  One command issues per cycle.
module mem_ctrl
  import hms_pkg::*;
#(
  parameter int QDEPTH = 8,
  parameter int RFIFO  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  timing_t         dram_t,
  input  timing_t         scm_t,
  input  logic            req_valid,
  output logic            req_ready,
  input  mc_req_t         req,
  output logic            rsp_valid,   // read data
  output mc_rsp_t         rsp,
  output logic            wr_done,
  output logic [MTAG_W-1:0] wr_done_tag,
  output logic            act_valid,
  output logic [PAGE_W-1:0] act_page,
  // device side
  output dev_cmd_t        dev_cmd,
  input  logic            dev_rvalid,
  input  logic [COL_W-1:0] dev_rdata,
  output logic            idle
);
  localparam int NB = 2 * N_BANKS;
  localparam int QW = $clog2(QDEPTH + 1);
  localparam int IW = $clog2(QDEPTH);

  mc_req_t           q  [QDEPTH];
  logic [QW-1:0]     qn;
  logic              bopen [NB];
  logic [ROW_W-1:0]  brow  [NB];
  logic [31:0]       t_col [NB];   // earliest column command
  logic [31:0]       t_pre [NB];   // earliest precharge
  logic [31:0]       t_act [NB];   // earliest activate
  logic [31:0]       now;

  logic [MTAG_W-1:0] rtag [RFIFO];
  logic [$clog2(RFIFO)-1:0] rh, rt;
  logic [$clog2(RFIFO):0]   rcnt;

  function automatic int bidx(input mc_req_t r);
    return int'({r.rank, r.bank});
  endfunction

  // ---------------- scheduling ----------------
  logic          issue;
  logic [IW-1:0] sel;
  cmd_e          scmd;
  logic          rd_full;

  always_comb begin
    logic found_col, found_other, bank_hit_pending;
    int b;
    issue = 1'b0; sel = '0; scmd = CMD_NOP; b = 0; bank_hit_pending = 1'b0;
    found_col = 1'b0; found_other = 1'b0;
    rd_full = (rcnt >= ($clog2(RFIFO)+1)'(RFIFO - 1));
    // first ready: oldest row hit whose column command may issue
    for (int i = 0; i < QDEPTH; i++) begin
      b = bidx(q[i]);
      if (QW'(i) < qn && !found_col && bopen[b] && brow[b] == q[i].row &&
          now >= t_col[b] && (q[i].write || !rd_full)) begin
        found_col = 1'b1; sel = IW'(i); scmd = q[i].write ? CMD_WR : CMD_RD;
      end
    end
    // first come: oldest request that can open its row
    if (!found_col) begin
      for (int i = 0; i < QDEPTH; i++) begin
        b = bidx(q[i]);
        if (QW'(i) < qn && !found_other) begin
          if (!bopen[b]) begin
            if (now >= t_act[b]) begin
              found_other = 1'b1; sel = IW'(i); scmd = CMD_ACT;
            end
          end else if (brow[b] != q[i].row) begin
            bank_hit_pending = 1'b0;
            for (int j = 0; j < QDEPTH; j++)
              if (QW'(j) < qn && bidx(q[j]) == b && q[j].row == brow[b]) bank_hit_pending = 1'b1;
            if (!bank_hit_pending && now >= t_pre[b]) begin
              found_other = 1'b1; sel = IW'(i); scmd = CMD_PRE;
            end
          end
        end
      end
    end
    issue = found_col || found_other;
  end

  logic col_issue;
  assign col_issue = issue && (scmd == CMD_RD || scmd == CMD_WR);
  assign req_ready = (qn != QW'(QDEPTH)) || col_issue;
  assign idle      = (qn == '0) && (rcnt == '0);

  always_comb begin
    dev_cmd       = '0;
    dev_cmd.cmd   = CMD_NOP;
    if (issue) begin
      dev_cmd.cmd   = scmd;
      dev_cmd.rank  = q[sel].rank;
      dev_cmd.bank  = q[sel].bank;
      dev_cmd.row   = q[sel].row;
      dev_cmd.col   = q[sel].col;
      dev_cmd.bmask = q[sel].bmask;
      dev_cmd.wdata = q[sel].wdata;
    end
  end

  timing_t st;
  assign st = (q[sel].rank == RANK_SCM) ? scm_t : dram_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qn <= '0; now <= '0;
      for (int b = 0; b < NB; b++) begin
        bopen[b] <= 1'b0; brow[b] <= '0; t_col[b] <= '0; t_pre[b] <= '0; t_act[b] <= '0;
      end
      rh <= '0; rt <= '0; rcnt <= '0;
      rsp_valid <= 1'b0; rsp <= '0; wr_done <= 1'b0; wr_done_tag <= '0;
      act_valid <= 1'b0; act_page <= '0;
    end else begin
      logic [QW-1:0] n;
      int b;
      now <= now + 1;
      wr_done <= 1'b0; act_valid <= 1'b0; rsp_valid <= 1'b0;
      n = qn;
      b = bidx(q[sel]);
      if (issue) begin
        unique case (scmd)
          CMD_ACT: begin
            bopen[b] <= 1'b1; brow[b] <= q[sel].row;
            t_col[b] <= now + 32'(st.rcd);
            t_pre[b] <= now + 32'(st.ras);
            act_valid <= 1'b1; act_page <= q[sel].page;
          end
          CMD_PRE: begin
            bopen[b] <= 1'b0;
            t_act[b] <= now + 32'(st.rp);
          end
          CMD_RD, CMD_WR: begin
            if (scmd == CMD_WR) begin
              wr_done <= 1'b1; wr_done_tag <= q[sel].tag;
              if (now + 32'(st.wr) > t_pre[b]) t_pre[b] <= now + 32'(st.wr);
            end else begin
              rtag[rt] <= q[sel].tag; rt <= rt + 1'b1;
              if (now + 1 > t_pre[b]) t_pre[b] <= now + 1;
            end
            // remove the entry, keeping age order
            for (int i = 0; i < QDEPTH - 1; i++)
              if (IW'(i) >= sel) q[i] <= q[i+1];
            n = n - 1'b1;
          end
          default: ;
        endcase
      end
      if (req_valid && req_ready) begin
        q[n] <= req;
        n = n + 1'b1;
      end
      qn <= n;
      // read data in issue order
      if (dev_rvalid) begin
        rsp_valid <= 1'b1; rsp.tag <= rtag[rh]; rsp.rdata <= dev_rdata; rh <= rh + 1'b1;
      end
      rcnt <= rcnt + ($clog2(RFIFO)+1)'(issue && scmd == CMD_RD) - ($clog2(RFIFO)+1)'(dev_rvalid);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) dev_rvalid |-> rcnt != '0);
endmodule
