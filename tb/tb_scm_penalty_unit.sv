// tb_scm_penalty_unit: penalty score for reads and writes over 1..8
// columns, with the MLC and SLC timing tables and a throttled tWR.
module tb_scm_penalty_unit;
  import hms_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  timing_t st;
  logic [3:0] nc;
  logic hw;
  logic [31:0] score;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  scm_penalty_unit dut (.clk, .rst_n, .dram_t(DRAM_TIMING), .scm_t(st), .num_cols(nc), .has_write(hw), .score);

  task automatic expect_score(input int rcd_s, input int wr_s);
    for (int n = 1; n <= 8; n++) begin
      nc = 4'(n);
      hw = 0; #1; checks++;
      if (score != 32'((rcd_s - 14) / n)) begin failures++; $display("FAIL rd n=%0d %0d", n, score); end
      hw = 1; #1; checks++;
      if (score != 32'((rcd_s - 14 + wr_s - 16) / n)) begin failures++; $display("FAIL wr n=%0d %0d", n, score); end
    end
  endtask

  initial begin
    st = SCM_MLC_T; nc = 1; hw = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    expect_score(120, 1000);           // 106 and 1090 cycles
    nc = 4; hw = 0; #1; checks++; if (score != 32'd26) failures++;
    st = SCM_SLC_T; repeat (2) @(posedge clk);
    expect_score(60, 150);
    st = SCM_MLC_T; st.wr = 16'd2000; repeat (2) @(posedge clk);
    expect_score(120, 2000);
    nc = 0; hw = 0; #1; checks++; if (score != 32'd106) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
