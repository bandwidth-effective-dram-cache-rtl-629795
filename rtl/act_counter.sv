// act_counter: per-page row-activation counters (hotness) of one channel.
//
// One CNT_W-bit counter per 2 MiB page is incremented whenever a DRAM or SCM
// row is activated on behalf of that page.  The largest value seen by this
// controller is kept for the victim-decrement probability of the bypass
// policy (p_dec = counter / maximum).  Counter and page sizes follow the
// paper (8-bit counters in 2 MiB granularity).
//
// Saturation: the paper keeps a 3-bit register so counters can be halved
// cheaply.  Here, when a counter would pass its maximum, a halving sweep
// starts: one counter per cycle is shifted right by one, and the 3-bit
// register counts halvings still pending (up to 7).  While a sweep runs,
// counters the sweep has not reached yet read as already halved, so every
// read sees a consistent scale.  The maximum is halved when a sweep starts.
// The sweep order is this design's choice.
//
// enable = 0 makes rd_cnt and max_cnt read as 1, the paper's option of using
// a constant instead of the counters.  Reads are combinational; an
// increment is visible the next cycle.  Reset clears all counters.
module act_counter
  import hms_pkg::*;
#(
  parameter int N_PAGES = 1 << PAGE_W,
  parameter int CNT_W   = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       enable,
  input  logic                       act_valid,
  input  logic [$clog2(N_PAGES)-1:0] act_page,
  input  logic [$clog2(N_PAGES)-1:0] rd_page,
  output logic [CNT_W-1:0]           rd_cnt,
  output logic [CNT_W-1:0]           max_cnt,
  output logic [2:0]                 shifts_pending
);
  localparam int PW = $clog2(N_PAGES);
  localparam logic [CNT_W-1:0] CMAX = '1;

  logic [CNT_W-1:0] cnt [N_PAGES];
  logic [CNT_W-1:0] max_q;
  logic [PW-1:0]    ptr;
  logic [2:0]       pend;

  // value of a counter at the scale of the running sweep
  function automatic logic [CNT_W-1:0] view(input logic [CNT_W-1:0] v, input logic [PW-1:0] idx,
                                            input logic [2:0] p, input logic [PW-1:0] sp);
    return (p != 3'd0 && idx >= sp) ? (v >> 1) : v;
  endfunction

  logic [CNT_W-1:0] act_view;
  assign act_view = view(cnt[act_page], act_page, pend, ptr);
  assign rd_cnt   = enable ? view(cnt[rd_page], rd_page, pend, ptr) : CNT_W'(1);
  assign max_cnt  = enable ? ((max_q == '0) ? CNT_W'(1) : max_q) : CNT_W'(1);
  assign shifts_pending = pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PAGES; i++) cnt[i] <= '0;
      max_q <= '0;
      ptr   <= '0;
      pend  <= '0;
    end else begin
      // sweep one counter per cycle
      if (pend != 3'd0) begin
        if (!(act_valid && enable && act_page == ptr))
          cnt[ptr] <= cnt[ptr] >> 1;
        ptr <= ptr + 1'b1;
        if (ptr == PW'(N_PAGES - 1)) pend <= pend - 3'd1;
      end
      if (act_valid && enable) begin
        if (act_view == CMAX) begin
          // saturated: request a halving
          if (pend == 3'd0) begin
            ptr   <= '0;
            pend  <= 3'd1;
            max_q <= max_q >> 1;
          end else if (pend != 3'd7) begin
            pend  <= pend + 3'd1;
          end
          if (pend != 3'd0 && act_page == ptr) cnt[act_page] <= act_view;
        end else begin
          // a counter the sweep has still to halve gets +2 at its old scale
          if (pend != 3'd0 && act_page > ptr)
            cnt[act_page] <= (cnt[act_page] >= CMAX - 1'b1) ? CMAX : cnt[act_page] + CNT_W'(2);
          else
            cnt[act_page] <= act_view + 1'b1;
          if (act_view + 1'b1 > max_q) max_q <= act_view + 1'b1;
        end
      end
    end
  end
endmodule
