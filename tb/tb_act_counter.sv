// tb_act_counter: counting, the per-controller maximum, halving on
// saturation (checked against a reference array), and enable = 0.
module tb_act_counter;
  import hms_pkg::*;
  localparam int NP = 16;
  logic clk = 0, rst_n = 1, en, av;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic [3:0] ap, rp;
  logic [7:0] rc, mx;
  logic [2:0] sp;
  int checks = 0, failures = 0;
  int ref_c [NP];
  always #5 clk = ~clk;
  act_counter #(.N_PAGES(NP)) dut (.clk, .rst_n, .enable(en), .act_valid(av), .act_page(ap),
                                   .rd_page(rp), .rd_cnt(rc), .max_cnt(mx), .shifts_pending(sp));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s rc=%0d mx=%0d", s, rc, mx); end
  endtask
  task automatic act(input int p);
    @(negedge clk); av = 1; ap = 4'(p); @(negedge clk); av = 0;
  endtask
  initial begin
    en = 1; av = 0; ap = 0; rp = 0;
    for (int i = 0; i < NP; i++) ref_c[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int p; p = $urandom_range(0, 3); act(p); ref_c[p]++;
    end
    for (int i = 0; i < 4; i++) begin rp = 4'(i); #1; chk(int'(rc) == ref_c[i], "count"); end
    begin int m = 0; for (int i = 0; i < 4; i++) if (ref_c[i] > m) m = ref_c[i]; chk(int'(mx) == m, "max"); end
    // drive page 5 to saturation
    for (int n = 0; n < 255; n++) act(5);
    rp = 5; #1; chk(rc == 8'd255, "saturated");
    act(5);                         // triggers a halving sweep
    rp = 5; #1; chk(rc == 8'd127 && sp != 0, "halved view");
    repeat (NP + 2) @(negedge clk);
    chk(sp == 0, "sweep done");
    for (int i = 0; i < 4; i++) begin rp = 4'(i); #1; chk(int'(rc) == ref_c[i] / 2, "halved"); end
    rp = 5; #1; chk(rc == 8'd127, "page5");
    chk(mx == 8'd127, "max halved");
    en = 0; #1; chk(rc == 8'd1 && mx == 8'd1, "disabled -> 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
