// tb_bypass_policy: both comparison levels of the bypass policy, victim
// decrement probability, the moving-average level and enable = 0.
// Expected levels are worked out by hand from level = min(3, 4*score/max).
module tb_bypass_policy;
  import hms_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic en, hv, vv, commit;
  logic [31:0] hs, ms;
  logic [7:0] ac, am;
  logic [1:0] vl, pl, al, fl;
  logic l1, fill, dec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bypass_policy #(.F_UPDATE(2), .AVG_DIV(4)) dut (
    .clk, .rst_n, .enable(en), .hit_valid(hv), .hit_score(hs), .miss_score(ms), .act_cnt(ac),
    .act_max(am), .victim_valid(vv), .victim_lvl(vl), .miss_commit(commit), .pen_lvl(pl),
    .avg_lvl(al), .l1_pass(l1), .aff_lvl(fl), .fill, .dec_victim(dec));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s pl=%0d al=%0d fl=%0d l1=%0d fill=%0d dec=%0d", s, pl, al, fl, l1, fill, dec); end
  endtask
  task automatic do_commit();
    @(negedge clk); commit = 1; @(negedge clk); commit = 0;
  endtask
  initial begin
    int n_dec;
    en = 1; hv = 0; vv = 0; commit = 0; hs = 0; ms = 0; ac = 1; am = 1; vl = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    ms = 100; #1; chk(pl == 3 && l1 && fill, "first miss fills (invalid victim)");
    do_commit();
    ms = 10; #1; chk(pl == 0 && !l1 && !fill && !dec, "low penalty bypasses at level 1");
    ms = 60; vv = 1; vl = 3; #1; chk(pl == 2 && l1 && fl == 2 && !fill && dec, "level 2 loses, victim decremented");
    vl = 1; #1; chk(fill && !dec, "level 2 wins");
    vl = 0; ms = 10; #1; chk(!dec, "no decrement at level 1");
    // p_dec = act_cnt / act_max
    ms = 60; vl = 3; ac = 0; am = 4; #1; chk(!dec, "p_dec = 0");
    ac = 4; #1; chk(dec, "p_dec = 1");
    ac = 1; n_dec = 0;
    for (int i = 0; i < 400; i++) begin #1; if (dec) n_dec++; do_commit(); end
    checks++; if (n_dec < 60 || n_dec > 140) begin failures++; $display("FAIL p_dec 1/4: %0d of 400", n_dec); end
    // hits at score 90 pull the average level to 3 (max is 100)
    ac = 1; am = 1;
    for (int i = 0; i < 40; i++) begin @(negedge clk); hv = 1; hs = 90; end
    @(negedge clk); hv = 0; #1;
    chk(al == 3, "average level follows hits");
    ms = 99; vv = 0; #1; chk(pl == 3 && !l1 && !fill, "equal to average level bypasses");
    en = 0; #1; chk(fill && l1, "disabled: always fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
