// Self-checking testbench for shared_pim_controller (4 subarrays, 16 rows,
// default DDR3-1600 timing). It watches the command port and checks:
//   - a bus copy keeps its timing while the local channel streams RD
//     commands to another open subarray; the local channel loses exactly
//     the three clocks the transfer uses (arbitration stalls) and its
//     commands overlap the transfer;
//   - a local ACT to a shared row whose GWL is raised waits for the GPRE;
//   - a bus copy into a shared row that is open locally waits for the
//     local PRE;
//   - a local command to the subarray a RowClone holds open waits for the
//     RowClone's PRE.
module tb_shared_pim_controller;
  import shared_pim_pkg::*;
  localparam int unsigned NSUB = 4, ROWS = 16, SR = 2, MAXG = 4, NREG = ROWS - SR;

  logic clk = 1'b0, rst_n = 1'b0;
  logic loc_valid, loc_ready;
  cmd_e loc_cmd;
  logic [1:0] loc_sa;
  logic [3:0] loc_row;
  logic xfer_valid, xfer_ready, xfer_done;
  xfer_op_e xfer_op;
  logic [1:0] xfer_src_sa;
  logic [3:0] xfer_src_row, xfer_dst_row;
  logic [0:0] xfer_src_idx;
  logic [MAXG-1:0] xfer_tgt_valid;
  logic [MAXG-1:0][1:0] xfer_tgt_sa;
  logic [MAXG-1:0][0:0] xfer_tgt_idx;
  cmd_e cmd;
  logic [1:0] cmd_sa;
  logic [3:0] cmd_row;
  logic [MAXG-1:0] cmd_tgt_valid;
  logic [MAXG-1:0][1:0] cmd_tgt_sa;
  logic [MAXG-1:0][0:0] cmd_tgt_idx;
  logic [NSUB-1:0][5:0] status;
  logic [NSUB-1:0][SR-1:0] gwl_status;
  logic ev_loc_conflict, ev_xfer_conflict, ev_arb_stall, ev_overlap;

  int cyc = 0;
  int n_loc_conf = 0, n_xfer_conf = 0, n_arb = 0, n_overlap = 0, n_loc_issued = 0;
  int t_gpre = -1, t_pre = -1, t_last_gact = -1, t_loc_act = -1;
  int checks = 0, failures = 0;

  shared_pim_controller #(.NSUB(NSUB), .ROWS(ROWS), .SHARED_ROWS(SR), .MAX_GWL(MAXG)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_loc_conf  <= n_loc_conf + int'(ev_loc_conflict);
    n_xfer_conf <= n_xfer_conf + int'(ev_xfer_conflict);
    n_arb       <= n_arb + int'(ev_arb_stall);
    n_overlap   <= n_overlap + int'(ev_overlap);
    n_loc_issued <= n_loc_issued + int'(loc_valid && loc_ready);
    if (cmd == CMD_GPRE) t_gpre <= cyc;
    if (cmd == CMD_PRE)  t_pre <= cyc;
    if (cmd == CMD_GACT) t_last_gact <= cyc;
    if (loc_valid && loc_ready && loc_cmd == CMD_ACT) t_loc_act <= cyc;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input int g, input int e);
    checks++;
    if (g != e) begin failures++; $display("%s: got %0d expected %0d", what, g, e); end
  endtask

  task automatic local_cmd(input cmd_e c, input int s, input int r = 0);
    @(negedge clk);
    loc_valid = 1; loc_cmd = c; loc_sa = 2'(s); loc_row = 4'(r);
    @(posedge clk);
    while (!loc_ready) @(posedge clk);
    @(negedge clk);
    loc_valid = 0;
  endtask

  task automatic xfer(input xfer_op_e op, input int ssa, input int sidx, input int srow,
                      input int drow, input int dsa, input int didx);
    @(negedge clk);
    xfer_valid = 1; xfer_op = op; xfer_src_sa = 2'(ssa); xfer_src_idx = 1'(sidx);
    xfer_src_row = 4'(srow); xfer_dst_row = 4'(drow);
    xfer_tgt_valid = 4'b0001; xfer_tgt_sa[0] = 2'(dsa); xfer_tgt_idx[0] = 1'(didx);
    @(negedge clk);
    xfer_valid = 0;
  endtask

  initial begin
    int a0, i0, t0;
    loc_valid = 0; loc_cmd = CMD_NOP; loc_sa = 0; loc_row = 0;
    xfer_valid = 0; xfer_op = XFER_BUS_COPY; xfer_src_sa = 0; xfer_src_idx = 0;
    xfer_src_row = 0; xfer_dst_row = 0; xfer_tgt_valid = 0; xfer_tgt_sa = 0; xfer_tgt_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. bus copy with a stream of local reads on subarray 1
    local_cmd(CMD_ACT, 1, 3);
    xfer(XFER_BUS_COPY, 0, 0, 0, 0, 2, 1);
    a0 = n_arb; i0 = n_loc_issued; t0 = cyc;
    loc_valid = 1; loc_cmd = CMD_RD; loc_sa = 1;
    while (!xfer_done) @(negedge clk);
    loc_valid = 0;
    chk("arbitration stalls during a bus copy", n_arb - a0, 3);
    chk("local reads issued during a bus copy", n_loc_issued - i0, (cyc - t0) - 3);
    checks++; if (n_overlap == 0) begin failures++; $display("no overlap"); end
    local_cmd(CMD_PRE, 1);

    // 2. local ACT of a shared row whose GWL is raised waits for GPRE
    xfer(XFER_BUS_COPY, 0, 0, 0, 0, 2, 1);
    @(negedge clk);
    repeat (6) @(negedge clk);            // both GACTs have been issued
    t0 = n_loc_conf;
    local_cmd(CMD_ACT, 2, NREG + 1);
    checks++; if (n_loc_conf == t0) begin failures++; $display("no local conflict"); end
    chk("shared-row ACT after GPRE", t_loc_act > t_gpre && t_gpre >= 0, 1);
    local_cmd(CMD_PRE, 2);
    @(negedge clk); while (!xfer_ready) @(negedge clk);

    // 3. bus copy into a locally open shared row waits for the local PRE
    local_cmd(CMD_ACT, 3, NREG);
    t0 = n_xfer_conf;
    xfer(XFER_BUS_COPY, 0, 1, 0, 0, 3, 0);
    repeat (20) @(negedge clk);
    checks++; if (n_xfer_conf == t0) begin failures++; $display("no transfer conflict"); end
    local_cmd(CMD_PRE, 3);
    while (!xfer_done) @(negedge clk);
    chk("destination GACT after local PRE", t_last_gact > t_pre, 1);

    // 4. RowClone lock
    xfer(XFER_ROWCLONE, 0, 0, 2, 7, 0, 0);
    repeat (3) @(negedge clk);
    t0 = n_loc_conf;
    local_cmd(CMD_ACT, 0, 9);            // same subarray: must wait
    checks++; if (n_loc_conf == t0) begin failures++; $display("no lock conflict"); end
    chk("local ACT after RowClone PRE", t_loc_act > t_pre, 1);
    local_cmd(CMD_PRE, 0);

    $display("loc_conflicts=%0d xfer_conflicts=%0d arb_stalls=%0d overlaps=%0d",
             n_loc_conf, n_xfer_conf, n_arb, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
