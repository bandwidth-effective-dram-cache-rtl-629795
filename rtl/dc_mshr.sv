// dc_mshr: DRAM-cache miss status holding registers of one channel.
//
// Requests from the L2 slice (one 32 B sector each) are collected per 256 B
// DRAM-cache line.  An entry records the line address, an 8-bit mask of the
// columns accessed, whether any access writes, and per column the read's
// L2 identifier or the written data.  A request to a line that already has a
// waiting entry merges into it, so the cache controller later sees, per line,
// how many columns a group of accesses touched and whether it wrote: the two
// inputs of the SCM penalty score.  The 128 entries and the column-mask /
// read-write fields follow the paper; the per-column identifiers, the write
// data buffer beside the entries and the in-order service are this design's
// choices.  The line's valid/dirty bits and affinity level, which the paper
// also keeps per entry, are held by the controller for the entry in service.
//
// Order and hazards: entries leave in arrival order.  The head entry is taken
// by the controller with `take` and released with `done`; once taken it no
// longer merges.  A request whose column already has an access pending in the
// waiting entry of its line is held (in_ready = 0) until that entry is taken,
// which keeps same-column accesses in order.  Writes are acknowledged when
// accepted (posted).
//
// Timing: in_valid && in_ready accepts a request in that cycle; the head is
// visible combinationally; take/done act at the clock edge.
module dc_mshr
  import hms_pkg::*;
#(
  parameter int N_ENTRIES = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  l2_req_t                in_req,
  output logic                   wr_ack,       // posted-write acknowledgement
  output logic [ID_W-1:0]        wr_ack_id,
  // head entry
  output logic                   head_valid,
  output logic                   head_busy,
  output logic [LINE_ADDR_W-1:0] head_line,
  output logic [7:0]             head_rmask,
  output logic [7:0]             head_wmask,
  output logic [ID_W-1:0]        head_ids [8],
  output logic [COL_W-1:0]       head_wdata [8],
  input  logic                   take,
  input  logic                   done,
  output logic [$clog2(N_ENTRIES+1)-1:0] occupancy
);
  localparam int IW = $clog2(N_ENTRIES);

  logic                   ev   [N_ENTRIES];
  logic [LINE_ADDR_W-1:0] line [N_ENTRIES];
  logic [7:0]             rm   [N_ENTRIES];
  logic [7:0]             wm   [N_ENTRIES];
  logic [ID_W-1:0]        ids  [N_ENTRIES][8];
  logic [COL_W-1:0]       wd   [N_ENTRIES][8];
  logic [IW-1:0]          hd, tl;
  logic [IW:0]            cnt;
  logic                   busy;

  logic [LINE_ADDR_W-1:0] rl;
  logic [2:0]             rc;
  logic                   m_found;
  logic [IW-1:0]          m_idx;
  logic                   m_conflict;

  assign rl = in_req.addr[SEC_ADDR_W-1:3];
  assign rc = in_req.addr[2:0];

  always_comb begin
    m_found = 1'b0; m_idx = '0;
    for (int i = 0; i < N_ENTRIES; i++) begin
      if (ev[i] && line[i] == rl && !(busy && IW'(i) == hd) && !m_found) begin
        m_found = 1'b1; m_idx = IW'(i);
      end
    end
    m_conflict = m_found && (rm[m_idx][rc] || wm[m_idx][rc]);
    in_ready   = m_found ? !m_conflict : (cnt != (IW+1)'(N_ENTRIES));
  end

  assign head_valid = ev[hd];
  assign head_busy  = busy;
  assign head_line  = line[hd];
  assign head_rmask = rm[hd];
  assign head_wmask = wm[hd];
  always_comb for (int c = 0; c < 8; c++) begin
    head_ids[c]   = ids[hd][c];
    head_wdata[c] = wd[hd][c];
  end
  assign occupancy = cnt;

  logic acc;
  logic [IW-1:0] widx;
  assign acc  = in_valid && in_ready;
  assign widx = m_found ? m_idx : tl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ENTRIES; i++) begin
        ev[i] <= 1'b0; rm[i] <= '0; wm[i] <= '0;
      end
      hd <= '0; tl <= '0; cnt <= '0; busy <= 1'b0;
      wr_ack <= 1'b0; wr_ack_id <= '0;
    end else begin
      wr_ack    <= acc && in_req.write;
      wr_ack_id <= in_req.id;
      if (acc) begin
        if (!m_found) begin
          ev[tl]   <= 1'b1;
          line[tl] <= rl;
          rm[tl]   <= in_req.write ? 8'd0 : (8'd1 << rc);
          wm[tl]   <= in_req.write ? (8'd1 << rc) : 8'd0;
          tl       <= tl + 1'b1;
        end else if (in_req.write) begin
          wm[m_idx][rc] <= 1'b1;
        end else begin
          rm[m_idx][rc] <= 1'b1;
        end
        if (in_req.write) wd[widx][rc]  <= in_req.wdata;
        else              ids[widx][rc] <= in_req.id;
      end
      if (take && ev[hd]) busy <= 1'b1;
      if (done && busy) begin
        ev[hd] <= 1'b0;
        rm[hd] <= '0;
        wm[hd] <= '0;
        hd     <= hd + 1'b1;
        busy   <= 1'b0;
      end
      cnt <= cnt + (IW+1)'(acc && !m_found) - (IW+1)'(done && busy);
    end
  end

  // a released entry was taken first; an accepted request never overflows
  assert property (@(posedge clk) disable iff (!rst_n) done |-> busy);
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= (IW+1)'(N_ENTRIES));
endmodule
