// scm_penalty_unit: SCM penalty score of a group of accesses to one row.
//
// The score estimates how many cycles per column access serving the group
// from SCM costs over serving it from DRAM:
//   score = (Latency_SCM - Latency_DRAM) / columns accessed.
// Column latency is equal in both technologies and cancels, so the paper
// reduces the numerator to two pre-computed 32-bit values,
//   reads only : tRCD_SCM - tRCD_DRAM
//   with write : tRCD_SCM - tRCD_DRAM + tWR_SCM - tWR_DRAM,
// held here in two registers reloaded every cycle from the current timing
// sets (so SLC/MLC mode and throttling are followed), and an integer divider.
// With the MLC table values the numerators are 106 and 1090 cycles.
//
// Timing: the registers lag a timing change by one cycle; the division is
// combinational, so score follows num_cols/has_write in the same cycle.
// num_cols of 0 is treated as 1.  Truncating division, as in the paper's
// example (93 cycles / 4 accesses = 23).
module scm_penalty_unit
  import hms_pkg::*;
#(
  parameter int REG_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  timing_t          dram_t,
  input  timing_t          scm_t,
  input  logic [3:0]       num_cols,
  input  logic             has_write,
  output logic [REG_W-1:0] score
);
  logic [REG_W-1:0] pen_rd, pen_wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pen_rd <= '0;
      pen_wr <= '0;
    end else begin
      pen_rd <= REG_W'(scm_t.rcd) - REG_W'(dram_t.rcd);
      pen_wr <= REG_W'(scm_t.rcd) - REG_W'(dram_t.rcd) + REG_W'(scm_t.wr) - REG_W'(dram_t.wr);
    end
  end

  logic [3:0] n;
  always_comb begin
    n = (num_cols == 4'd0) ? 4'd1 : num_cols;
    score = (has_write ? pen_wr : pen_rd) / REG_W'(n);
  end
endmodule
