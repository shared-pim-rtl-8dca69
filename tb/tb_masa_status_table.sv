// Self-checking testbench for masa_status_table. It issues a command
// stream and asks, before each, whether the candidate commands conflict;
// the expected answers come from a small reference model of the rules
// (open subarray, raised row, raised GWLs). It also checks the 11-bit entry
// layout {activated, row, designated} at the default 512 rows.
module tb_masa_status_table;
  import shared_pim_pkg::*;
  localparam int unsigned NSUB = 16, ROWS = 512, SR = 2, MAXG = 4, NREG = ROWS - SR;

  logic clk = 1'b0, rst_n = 1'b0;
  cmd_e upd_cmd;
  logic [3:0] upd_sa;
  logic [8:0] upd_row;
  logic [MAXG-1:0] upd_tgt_valid;
  logic [MAXG-1:0][3:0] upd_tgt_sa;
  logic [MAXG-1:0][0:0] upd_tgt_idx;
  cmd_e [0:0] chk_cmd;
  logic [0:0] chk_rowclone;
  logic [0:0][3:0] chk_sa;
  logic [0:0][8:0] chk_row;
  logic [0:0][MAXG-1:0] chk_tgt_valid;
  logic [0:0][MAXG-1:0][3:0] chk_tgt_sa;
  logic [0:0][MAXG-1:0][0:0] chk_tgt_idx;
  logic [0:0] chk_conflict;
  logic [NSUB-1:0][10:0] entry;
  logic [NSUB-1:0][SR-1:0] gwl;

  // reference
  logic ref_act [NSUB];
  int   ref_row [NSUB];
  logic ref_gwl [NSUB][SR];
  int checks = 0, failures = 0, n_conf = 0;

  masa_status_table #(.NSUB(NSUB), .ROWS(ROWS), .SHARED_ROWS(SR), .MAX_GWL(MAXG), .NCHK(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_conflict();
    logic c = 0;
    case (chk_cmd[0])
      CMD_ACT: begin
        if (ref_act[chk_sa[0]] != chk_rowclone[0]) c = 1;
        if (chk_row[0] >= NREG && ref_gwl[chk_sa[0]][chk_row[0] - NREG]) c = 1;
      end
      CMD_GACT:
        for (int t = 0; t < MAXG; t++)
          if (chk_tgt_valid[0][t] && ref_act[chk_tgt_sa[0][t]] &&
              ref_row[chk_tgt_sa[0][t]] == NREG + chk_tgt_idx[0][t]) c = 1;
      CMD_WR, CMD_RD: if (!ref_act[chk_sa[0]]) c = 1;
      default: ;
    endcase
    return c;
  endfunction

  initial begin
    cmd_e cands [5] = '{CMD_ACT, CMD_PRE, CMD_WR, CMD_GACT, CMD_GPRE};
    upd_cmd = CMD_NOP; upd_sa = 0; upd_row = 0; upd_tgt_valid = 0; upd_tgt_sa = 0; upd_tgt_idx = 0;
    chk_cmd[0] = CMD_NOP; chk_rowclone = 0; chk_sa = 0; chk_row = 0;
    chk_tgt_valid = 0; chk_tgt_sa = 0; chk_tgt_idx = 0;
    foreach (ref_act[s]) begin
      ref_act[s] = 0; ref_row[s] = 0; ref_gwl[s][0] = 0; ref_gwl[s][1] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // candidate, often aimed at shared rows of a few subarrays
      chk_cmd[0]      = cands[$urandom_range(0, 4)];
      chk_rowclone[0] = $urandom_range(0, 1);
      chk_sa[0]       = 4'($urandom_range(0, 3));
      chk_row[0]      = ($urandom_range(0, 1) != 0) ? 9'(NREG + $urandom_range(0, 1))
                                                     : 9'($urandom_range(0, 3));
      for (int t = 0; t < MAXG; t++) begin
        chk_tgt_valid[0][t] = $urandom_range(0, 1);
        chk_tgt_sa[0][t]    = 4'($urandom_range(0, 3));
        chk_tgt_idx[0][t]   = 1'($urandom_range(0, 1));
      end
      #1;
      checks++;
      if (chk_conflict[0] !== ref_conflict()) begin
        failures++;
        $display("cmd %s: conflict %b expected %b", chk_cmd[0].name(), chk_conflict[0], ref_conflict());
      end
      if (chk_conflict[0]) n_conf++;
      // issue the candidate when legal
      if (!chk_conflict[0]) begin
        upd_cmd = chk_cmd[0]; upd_sa = chk_sa[0]; upd_row = chk_row[0];
        upd_tgt_valid = chk_tgt_valid[0]; upd_tgt_sa = chk_tgt_sa[0]; upd_tgt_idx = chk_tgt_idx[0];
        case (upd_cmd)
          CMD_ACT: begin ref_act[upd_sa] = 1; ref_row[upd_sa] = upd_row; end
          CMD_PRE: ref_act[upd_sa] = 0;
          CMD_GACT: for (int t = 0; t < MAXG; t++)
                      if (upd_tgt_valid[t]) ref_gwl[upd_tgt_sa[t]][upd_tgt_idx[t]] = 1;
          CMD_GPRE: foreach (ref_gwl[s]) begin ref_gwl[s][0] = 0; ref_gwl[s][1] = 0; end
          default: ;
        endcase
      end else upd_cmd = CMD_NOP;
      @(posedge clk); #1;
      upd_cmd = CMD_NOP;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (entry[s][10] !== ref_act[s] || (ref_act[s] && entry[s][9:1] !== 9'(ref_row[s]))) begin
          failures++; $display("entry %0d = %h", s, entry[s]);
        end
      end
    end
    // designation follows the last activated subarray
    checks++;
    if (upd_cmd == CMD_NOP && $countones({entry[0][0], entry[1][0], entry[2][0], entry[3][0]}) > 1) begin
      failures++; $display("more than one designated subarray");
    end
    checks++;
    if (n_conf == 0) begin failures++; $display("no conflict was exercised"); end
    $display("conflicts=%0d", n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
