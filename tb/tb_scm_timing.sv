// tb_scm_timing: SLC/MLC/TLC timing sets and doubling of tRCD / tWR while
// the temperature is above the limit, with release below limit - 2.
module tb_scm_timing;
  import hms_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  scm_mode_e mode;
  logic [7:0] temp, lim;
  logic ta, tw, thr;
  timing_t t;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  scm_timing dut (.clk, .rst_n, .mode, .temp, .temp_limit(lim), .throttle_act(ta), .throttle_wr(tw), .scm_t(t), .throttling(thr));

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    mode = SCM_MLC; temp = 60; lim = 85; ta = 1; tw = 0;
    repeat (2) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk); #1;
    chk(t == SCM_MLC_T && !thr, "mlc");
    mode = SCM_SLC; repeat (2) @(posedge clk); #1; chk(t == SCM_SLC_T, "slc");
    mode = SCM_TLC; repeat (2) @(posedge clk); #1; chk(t.rcd == 250 && t.wr == 2350 && t.ras == 250, "tlc");
    mode = SCM_MLC; temp = 90; repeat (3) @(posedge clk); #1;
    chk(thr && t.rcd == 240 && t.wr == 1000, "act throttle");
    tw = 1; repeat (2) @(posedge clk); #1; chk(t.rcd == 240 && t.wr == 2000, "both");
    ta = 0; repeat (2) @(posedge clk); #1; chk(t.rcd == 120 && t.wr == 2000, "wr only");
    temp = 84; repeat (3) @(posedge clk); #1; chk(thr, "hysteresis holds");
    temp = 83; repeat (3) @(posedge clk); #1; chk(!thr && t == SCM_MLC_T, "released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
