// hms_top: memory system of a GPU with Heterogeneous Memory Stacks.
//
// NUM_CH independent channels, each with its own DRAM-cache controller,
// Configurable Tag Cache, bypass logic and memory controller (hms_channel).
// Each channel's bus carries a DRAM rank (the cache) and an SCM rank.  The
// GPU's L2 slices, which the design does not include, connect to the l2_*
// ports (one 32 B sector request per channel per cycle); the memory dies,
// also outside the design, connect to the dev_* ports.  The configuration
// (flat mode, CTC ways, bypass and activation-counter enables, SCM cell mode
// and throttling) is common to all channels; the stack temperature is given
// per channel.  Eight channels is the configuration the paper simulates.
module hms_top
  import hms_pkg::*;
#(
  parameter int NUM_CH       = 8,
  parameter int MSHR_ENTRIES = 128,
  parameter int CTC_SETS     = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_flat,
  input  logic [2:0]      cfg_ctc_ways,
  input  logic            cfg_bypass_en,
  input  logic            cfg_act_en,
  input  scm_mode_e       cfg_scm_mode,
  input  logic            cfg_throttle_act,
  input  logic            cfg_throttle_wr,
  input  logic [7:0]      temp_limit,
  input  logic [7:0]      temp       [NUM_CH],
  input  logic            l2_req_valid [NUM_CH],
  output logic            l2_req_ready [NUM_CH],
  input  l2_req_t         l2_req       [NUM_CH],
  output logic            l2_rsp_valid [NUM_CH],
  output l2_rsp_t         l2_rsp       [NUM_CH],
  output logic            wr_ack       [NUM_CH],
  output logic [ID_W-1:0] wr_ack_id    [NUM_CH],
  output dev_cmd_t        dev_cmd      [NUM_CH],
  input  logic            dev_rvalid   [NUM_CH],
  input  logic [COL_W-1:0] dev_rdata   [NUM_CH],
  output logic            throttling   [NUM_CH],
  output logic            idle,
  output chan_stats_t     stats        [NUM_CH]
);
  logic [NUM_CH-1:0] ch_idle;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    hms_channel #(.MSHR_ENTRIES(MSHR_ENTRIES), .CTC_SETS(CTC_SETS)) u_ch (
      .clk, .rst_n, .cfg_flat, .cfg_ctc_ways, .cfg_bypass_en, .cfg_act_en, .cfg_scm_mode,
      .temp(temp[c]), .temp_limit, .cfg_throttle_act, .cfg_throttle_wr,
      .l2_req_valid(l2_req_valid[c]), .l2_req_ready(l2_req_ready[c]), .l2_req(l2_req[c]),
      .l2_rsp_valid(l2_rsp_valid[c]), .l2_rsp(l2_rsp[c]),
      .wr_ack(wr_ack[c]), .wr_ack_id(wr_ack_id[c]),
      .dev_cmd(dev_cmd[c]), .dev_rvalid(dev_rvalid[c]), .dev_rdata(dev_rdata[c]),
      .throttling(throttling[c]), .idle(ch_idle[c]), .stats(stats[c])
    );
  end

  assign idle = &ch_idle;
endmodule
