// Self-checking testbench for transfer_engine at the default DDR3-1600
// timing. For each kind of transfer it records every granted command with
// its clock number and compares the list with the expected sequence:
// bus copy and RowClone take 43 clocks from the first activation to done
// (second activation at +4, precharge at +32), a triple activation 39, a
// full copy three such steps, 129 clocks. One run holds the grant back to
// check that the sequence waits and keeps its spacing after the real issue.
module tb_transfer_engine;
  import shared_pim_pkg::*;
  localparam int unsigned NSUB = 16, ROWS = 512, SR = 2, MAXG = 4, NREG = ROWS - SR;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, done;
  xfer_op_e req_op;
  logic [3:0] req_src_sa;
  logic [8:0] req_src_row, req_dst_row;
  logic [0:0] req_src_idx;
  logic [MAXG-1:0] req_tgt_valid;
  logic [MAXG-1:0][3:0] req_tgt_sa;
  logic [MAXG-1:0][0:0] req_tgt_idx;
  logic cmd_valid, cmd_grant, cmd_rowclone;
  cmd_e cmd;
  logic [3:0] cmd_sa;
  logic [8:0] cmd_row;
  logic [MAXG-1:0] cmd_tgt_valid;
  logic [MAXG-1:0][3:0] cmd_tgt_sa;
  logic [MAXG-1:0][0:0] cmd_tgt_idx;
  logic lock_valid;
  logic [3:0] lock_sa;

  typedef struct { int t; cmd_e c; int sa; int row; logic rc; logic [MAXG-1:0] tv; } ev_t;
  ev_t got[$];
  int cyc = 0, t_done = -1, hold = 0;
  int checks = 0, failures = 0;

  transfer_engine dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  assign cmd_grant = cmd_valid && (hold == 0);
  always @(posedge clk) begin
    if (hold > 0) hold <= hold - 1;
    if (cmd_valid && cmd_grant)
      got.push_back('{cyc, cmd, cmd_sa, cmd_row, cmd_rowclone, cmd_tgt_valid});
    if (done) t_done <= cyc;
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

  task automatic run(input xfer_op_e op, input int hold_cycles);
    got.delete(); t_done = -1;
    @(negedge clk);
    req_valid = 1; req_op = op;
    @(negedge clk);
    req_valid = 0;
    hold = hold_cycles;
    wait (t_done >= 0);
    @(negedge clk);
  endtask

  // expect: command kind, subarray / row, rowclone flag, offset from first
  task automatic expect_cmd(input int i, input cmd_e c, input int sa, input int row,
                            input logic rc, input int dt, input logic [MAXG-1:0] tv);
    checks++;
    if (i >= got.size()) begin failures++; $display("command %0d missing", i); return; end
    chk($sformatf("cmd %0d kind", i), got[i].c, c);
    chk($sformatf("cmd %0d time", i), got[i].t - got[0].t, dt);
    if (c == CMD_ACT || c == CMD_PRE) chk($sformatf("cmd %0d sa", i), got[i].sa, sa);
    if (c == CMD_ACT) begin
      chk($sformatf("cmd %0d row", i), got[i].row, row);
      chk($sformatf("cmd %0d rowclone", i), got[i].rc, rc);
    end
    if (c == CMD_GACT) chk($sformatf("cmd %0d targets", i), got[i].tv, tv);
  endtask

  initial begin
    req_valid = 0; req_op = XFER_BUS_COPY;
    req_src_sa = 3; req_src_row = 17; req_src_idx = 1; req_dst_row = 99;
    req_tgt_valid = 4'b0111;
    req_tgt_sa = {4'd0, 4'd12, 4'd9, 4'd5};
    req_tgt_idx = {1'b0, 1'b1, 1'b0, 1'b0};
    repeat (2) @(negedge clk);
    rst_n = 1;

    // bus copy / broadcast to three rows
    run(XFER_BUS_COPY, 0);
    chk("bus copy commands", got.size(), 3);
    expect_cmd(0, CMD_GACT, 0, 0, 0, 0, 4'b0001);
    expect_cmd(1, CMD_GACT, 0, 0, 0, 4, 4'b0111);
    expect_cmd(2, CMD_GPRE, 0, 0, 0, 32, 0);
    chk("bus copy latency", t_done - got[0].t, 43);

    // triple activation
    run(XFER_TRA, 0);
    chk("tra commands", got.size(), 2);
    expect_cmd(0, CMD_GACT, 0, 0, 0, 0, 4'b0111);
    expect_cmd(1, CMD_GPRE, 0, 0, 0, 28, 0);
    chk("tra latency", t_done - got[0].t, 39);

    // RowClone inside subarray 3
    run(XFER_ROWCLONE, 0);
    chk("rowclone commands", got.size(), 3);
    expect_cmd(0, CMD_ACT, 3, 17, 0, 0, 0);
    expect_cmd(1, CMD_ACT, 3, 99, 1, 4, 0);
    expect_cmd(2, CMD_PRE, 3, 0, 0, 32, 0);
    chk("rowclone latency", t_done - got[0].t, 43);

    // full copy: subarray 3 row 17 -> subarray 5 row 99
    run(XFER_FULL_COPY, 0);
    chk("full copy commands", got.size(), 9);
    expect_cmd(0, CMD_ACT, 3, 17, 0, 0, 0);
    expect_cmd(1, CMD_ACT, 3, NREG + 1, 1, 4, 0);
    expect_cmd(2, CMD_PRE, 3, 0, 0, 32, 0);
    expect_cmd(3, CMD_GACT, 0, 0, 0, 43, 4'b0001);
    expect_cmd(4, CMD_GACT, 0, 0, 0, 47, 4'b0001);
    expect_cmd(5, CMD_GPRE, 0, 0, 0, 75, 0);
    expect_cmd(6, CMD_ACT, 5, NREG + 0, 0, 86, 0);
    expect_cmd(7, CMD_ACT, 5, 99, 1, 90, 0);
    expect_cmd(8, CMD_PRE, 5, 0, 0, 118, 0);
    chk("full copy latency", t_done - got[0].t, 129);
    checks++;
    if (got[3].c == CMD_GACT && (got.size() < 4)) failures++;

    // held grant: the first activation waits, the spacing is kept
    begin
      int t_req;
      t_req = cyc;
      run(XFER_BUS_COPY, 7);
      chk("held copy start", got[0].t - t_req >= 7, 1);
      expect_cmd(1, CMD_GACT, 0, 0, 0, 4, 4'b0111);
      chk("held copy latency", t_done - got[0].t, 43);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
