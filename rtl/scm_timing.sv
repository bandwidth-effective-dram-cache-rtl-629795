// scm_timing: SCM timing set for the memory controller, with cell mode and
// power throttling.
//
// The SCM can run in the capacity-oriented MLC mode (the default), the
// faster SLC mode used when the footprint is small, or TLC mode for the
// largest footprints; each has its own tRCD/tRAS/tWR.  SCM power throttling
// watches the stack temperature: when it rises above a threshold the
// activation time (tRCD) and/or the write recovery time (tWR) are doubled,
// selected by throttle_act / throttle_wr.  Mode values and the doubling
// follow the paper; the threshold comparison with hysteresis (throttling
// turns off only HYST degrees below the threshold) and the registered output
// are this design's choices.
//
// Timing: temperature is sampled each cycle; the output changes one cycle
// after the throttle state or mode changes.
module scm_timing
  import hms_pkg::*;
#(
  parameter int TEMP_W = 8,
  parameter int HYST   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  scm_mode_e         mode,
  input  logic [TEMP_W-1:0] temp,        // stack temperature, degrees C
  input  logic [TEMP_W-1:0] temp_limit,
  input  logic              throttle_act,
  input  logic              throttle_wr,
  output timing_t           scm_t,
  output logic              throttling
);
  timing_t base;

  always_comb begin
    unique case (mode)
      SCM_SLC: base = SCM_SLC_T;
      SCM_TLC: base = SCM_TLC_T;
      default: base = SCM_MLC_T;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      throttling <= 1'b0;
      scm_t      <= SCM_MLC_T;
    end else begin
      if (temp > temp_limit)
        throttling <= 1'b1;
      else if (32'(temp) + HYST <= 32'(temp_limit))
        throttling <= 1'b0;
      scm_t <= base;
      if (throttling && throttle_act) scm_t.rcd <= base.rcd << 1;
      if (throttling && throttle_wr)  scm_t.wr  <= base.wr << 1;
    end
  end
endmodule
