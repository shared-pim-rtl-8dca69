// Self-checking testbench for shared_pim_bank (reduced size: 4 subarrays,
// 2 bus segments, 16 rows of 32 bits). A reference array tracks every row.
// The test fills the bank, copies a shared row over the BK-bus while
// another subarray keeps a local row open and is read in between, broadcasts
// one shared row to four shared rows, runs a triple-row activation, moves a
// regular row to another subarray (RowClone, bus copy, RowClone) and finally
// reads every row back.
module tb_shared_pim_bank;
  import shared_pim_pkg::*;
  localparam int unsigned NSUB = 4, NSEG = 2, ROWS = 16, SR = 2, W = 32, MAXG = 4;
  localparam int unsigned NREG = ROWS - SR;

  logic clk = 1'b0, rst_n = 1'b0;
  cmd_e cmd;
  logic [1:0] sa;
  logic [3:0] row;
  logic [W-1:0] wdata, rdata;
  logic [MAXG-1:0] tgt_valid;
  logic [MAXG-1:0][1:0] tgt_sa;
  logic [MAXG-1:0][0:0] tgt_idx;
  logic rvalid, bus_sensed;
  logic [NSUB-1:0] sa_active;
  logic [NSUB-1:0][SR-1:0] gwl_raised;
  logic [W-1:0] ref_mem [NSUB][ROWS];
  int checks = 0, failures = 0;
  int n_overlap = 0, n_bcast = 0, n_tra = 0, n_copy = 0;

  shared_pim_bank #(.NSUB(NSUB), .NSEG(NSEG), .ROWS(ROWS), .SHARED_ROWS(SR),
                    .ROW_BITS(W), .MAX_GWL(MAXG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [W-1:0] g, input logic [W-1:0] e);
    checks++;
    if (g !== e) begin failures++; $display("%s: got %h expected %h", what, g, e); end
  endtask

  task automatic issue(input cmd_e c, input int s = 0, input int r = 0, input logic [W-1:0] d = '0);
    @(negedge clk);
    cmd = c; sa = 2'(s); row = 4'(r); wdata = d; tgt_valid = '0;
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  task automatic bus_act(input int sas[$], input int idxs[$]);
    @(negedge clk);
    cmd = CMD_GACT; tgt_valid = '0;
    foreach (sas[i]) begin
      tgt_valid[i] = 1'b1; tgt_sa[i] = 2'(sas[i]); tgt_idx[i] = 1'(idxs[i]);
    end
    @(negedge clk);
    cmd = CMD_NOP; tgt_valid = '0;
  endtask

  task automatic read_open(input int s, input logic [W-1:0] e, input string what);
    @(negedge clk);
    cmd = CMD_RD; sa = 2'(s);
    @(posedge clk); #1;
    cmd = CMD_NOP;
    checks++;
    if (!rvalid) begin failures++; $display("%s: no rvalid", what); end
    chk(what, rdata, e);
  endtask

  task automatic read_row(input int s, input int r);
    issue(CMD_ACT, s, r);
    read_open(s, ref_mem[s][r], $sformatf("row %0d.%0d", s, r));
    issue(CMD_PRE, s);
  endtask

  initial begin
    logic [W-1:0] a, b, c, m;
    cmd = CMD_NOP; sa = 0; row = 0; wdata = 0; tgt_valid = 0; tgt_sa = 0; tgt_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) begin
        ref_mem[s][r] = $urandom;
        issue(CMD_ACT, s, r);
        issue(CMD_WR, s, 0, ref_mem[s][r]);
        issue(CMD_PRE, s);
      end

    // bus copy sa0.shared0 -> sa2.shared1 while sa1 keeps row 3 open
    issue(CMD_ACT, 1, 3);
    bus_act('{0}, '{0});
    read_open(1, ref_mem[1][3], "local read during bus copy");
    if (bus_sensed && sa_active[1]) n_overlap++;
    bus_act('{2}, '{1});
    issue(CMD_GPRE);
    ref_mem[2][NREG+1] = ref_mem[0][NREG];
    read_open(1, ref_mem[1][3], "local read after bus copy");
    issue(CMD_PRE, 1);
    read_row(2, NREG + 1);
    n_copy++;

    // broadcast sa3.shared1 -> four shared rows
    bus_act('{3}, '{1});
    bus_act('{0, 1, 2, 1}, '{1, 0, 0, 1});
    issue(CMD_GPRE);
    ref_mem[0][NREG+1] = ref_mem[3][NREG+1];
    ref_mem[1][NREG+0] = ref_mem[3][NREG+1];
    ref_mem[2][NREG+0] = ref_mem[3][NREG+1];
    ref_mem[1][NREG+1] = ref_mem[3][NREG+1];
    n_bcast++;
    for (int s = 0; s < 3; s++) begin read_row(s, NREG); read_row(s, NREG + 1); end

    // triple activation over three subarrays
    for (int s = 0; s < 3; s++) begin
      ref_mem[s][NREG] = $urandom;
      issue(CMD_ACT, s, NREG); issue(CMD_WR, s, 0, ref_mem[s][NREG]); issue(CMD_PRE, s);
    end
    a = ref_mem[0][NREG]; b = ref_mem[1][NREG]; c = ref_mem[2][NREG];
    m = (a & b) | (a & c) | (b & c);
    bus_act('{0, 1, 2}, '{0, 0, 0});
    issue(CMD_GPRE);
    for (int s = 0; s < 3; s++) begin ref_mem[s][NREG] = m; read_row(s, NREG); end
    n_tra++;

    // regular row sa0.row2 -> sa3.row5: RowClone, bus copy, RowClone
    issue(CMD_ACT, 0, 2); issue(CMD_ACT, 0, NREG); issue(CMD_PRE, 0);
    bus_act('{0}, '{0}); bus_act('{3}, '{0}); issue(CMD_GPRE);
    issue(CMD_ACT, 3, NREG); issue(CMD_ACT, 3, 5); issue(CMD_PRE, 3);
    ref_mem[0][NREG] = ref_mem[0][2];
    ref_mem[3][NREG] = ref_mem[0][2];
    ref_mem[3][5]    = ref_mem[0][2];
    n_copy++;

    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) read_row(s, r);

    checks++;
    if (n_overlap == 0 || n_bcast == 0 || n_tra == 0 || n_copy == 0) begin
      failures++; $display("a mechanism was not exercised");
    end
    $display("overlap=%0d broadcast=%0d tra=%0d copy=%0d", n_overlap, n_bcast, n_tra, n_copy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
