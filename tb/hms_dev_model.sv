// hms_dev_model: behavioural model of one HMS channel's memory dies, for
// simulation only (not synthesizable).
//
// Rank 0 is DRAM, rank 1 SCM, 16 banks each.  The model executes the ACT /
// RD / WR / PRE commands of the memory controller, stores written columns in
// an associative array (honouring the byte mask) and returns read data tCL
// cycles after a RD.  A column never written reads as zero in DRAM and as
// scm_pattern(address) in SCM, so a testbench can predict initial contents.
// It also checks the bank protocol and the timing of every command against
// the timing sets it is given, and counts violations.
module hms_dev_model
  import hms_pkg::*;
(
  input  logic            clk,
  input  dev_cmd_t        cmd,
  input  timing_t         dram_t,
  input  timing_t         scm_t,
  output logic            rvalid,
  output logic [COL_W-1:0] rdata,
  output int              violations,
  output int              n_act [2],
  output int              n_rd  [2],
  output int              n_wr  [2]
);
  logic [COL_W-1:0] mem [logic [1+BANK_W+ROW_W+COL_IDX_W-1:0]];
  logic             open_ [2][N_BANKS];
  logic [ROW_W-1:0] orow  [2][N_BANKS];
  longint           t_act [2][N_BANKS];
  longint           t_pre [2][N_BANKS];
  longint           t_wr  [2][N_BANKS];
  longint           now;
  logic [COL_W-1:0] pipe_d [64];
  logic             pipe_v [64];

  // initial SCM content of the sector at sector address a
  function automatic logic [COL_W-1:0] scm_pattern(input logic [SEC_ADDR_W-1:0] a);
    logic [COL_W-1:0] v;
    for (int i = 0; i < COL_W / 32; i++) v[32*i +: 32] = {a[23:0] ^ 24'(i * 24'h9E3779), 8'(i)} ^ 32'hA5A5_0000;
    return v;
  endfunction

  initial begin
    now = 0; violations = 0; rvalid = 1'b0; rdata = '0;
    for (int r = 0; r < 2; r++) begin
      n_act[r] = 0; n_rd[r] = 0; n_wr[r] = 0;
      for (int b = 0; b < N_BANKS; b++) begin
        open_[r][b] = 1'b0; orow[r][b] = '0; t_act[r][b] = -10000; t_pre[r][b] = -10000; t_wr[r][b] = -10000;
      end
    end
    for (int i = 0; i < 64; i++) pipe_v[i] = 1'b0;
  end

  always @(posedge clk) begin
    timing_t t;
    int r, b;
    logic [1+BANK_W+ROW_W+COL_IDX_W-1:0] key;
    logic [COL_W-1:0] d;
    now <= now + 1;
    // read pipeline
    rvalid <= pipe_v[0];
    rdata  <= pipe_d[0];
    for (int i = 0; i < 63; i++) begin pipe_v[i] = pipe_v[i+1]; pipe_d[i] = pipe_d[i+1]; end
    pipe_v[63] = 1'b0;
    r = int'(cmd.rank);
    b = int'(cmd.bank);
    t = cmd.rank == RANK_SCM ? scm_t : dram_t;
    key = {cmd.rank, cmd.bank, cmd.row, cmd.col};
    case (cmd.cmd)
      CMD_ACT: begin
        n_act[r]++;
        if (open_[r][b] || now < t_pre[r][b] + longint'(t.rp)) begin
          violations++; $display("DEV: bad ACT r%0d b%0d at %0d", r, b, now);
        end
        open_[r][b] = 1'b1; orow[r][b] = cmd.row; t_act[r][b] = now;
      end
      CMD_PRE: begin
        if (!open_[r][b] || now < t_act[r][b] + longint'(t.ras) || now < t_wr[r][b] + longint'(t.wr)) begin
          violations++; $display("DEV: bad PRE r%0d b%0d at %0d", r, b, now);
        end
        open_[r][b] = 1'b0; t_pre[r][b] = now;
      end
      CMD_RD, CMD_WR: begin
        if (!open_[r][b] || orow[r][b] != cmd.row || now < t_act[r][b] + longint'(t.rcd)) begin
          violations++; $display("DEV: bad column r%0d b%0d at %0d", r, b, now);
        end
        if (mem.exists(key)) d = mem[key];
        else if (cmd.rank == RANK_SCM) d = scm_pattern({cmd.row[DC_ROW_W-BANK_W +: DC_TAG_W], cmd.row[DC_ROW_W-BANK_W-1:0], cmd.bank, cmd.col});
        else d = '0;
        if (cmd.cmd == CMD_WR) begin
          n_wr[r]++;
          for (int i = 0; i < COL_BYTES; i++) if (cmd.bmask[i]) d[8*i +: 8] = cmd.wdata[8*i +: 8];
          mem[key] = d;
          t_wr[r][b] = now;
        end else begin
          n_rd[r]++;
          pipe_v[int'(t.cl) - 2] = 1'b1;
          pipe_d[int'(t.cl) - 2] = d;
        end
      end
      default: ;
    endcase
  end
endmodule
