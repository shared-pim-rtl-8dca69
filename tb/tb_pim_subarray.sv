// Self-checking testbench for pim_subarray. A reference array holds what
// every row should contain. The test fills all rows through ACT/WR/PRE,
// reads them back through ACT/RD, runs RowClone copies between ordinary and
// shared rows, writes shared rows from the bus side while an ordinary row is
// open locally, and checks that commands without sel are ignored.
module tb_pim_subarray;
  import shared_pim_pkg::*;
  localparam int unsigned ROWS = 16;
  localparam int unsigned SR   = 2;
  localparam int unsigned W    = 32;
  localparam int unsigned NREG = ROWS - SR;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sel;
  cmd_e cmd;
  logic [3:0] row;
  logic [W-1:0] wdata, rdata;
  logic rvalid;
  logic [SR-1:0] bus_we;
  logic [W-1:0] bus_wdata;
  logic [SR-1:0][W-1:0] shared_q;
  logic active;
  logic [3:0] raised_row;
  logic [W-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  pim_subarray #(.ROWS(ROWS), .SHARED_ROWS(SR), .ROW_BITS(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic issue(input cmd_e c, input int r, input logic [W-1:0] d = '0);
    @(negedge clk);
    sel = 1'b1; cmd = c; row = 4'(r); wdata = d;
    @(negedge clk);
    sel = 1'b0; cmd = CMD_NOP;
  endtask

  task automatic read_row(input int r);
    issue(CMD_ACT, r);
    @(negedge clk);
    sel = 1'b1; cmd = CMD_RD;
    @(posedge clk); #1;
    sel = 1'b0; cmd = CMD_NOP;
    checks++;
    if (!rvalid) begin failures++; $display("no rvalid"); end
    check($sformatf("read row %0d", r), rdata, ref_mem[r]);
    issue(CMD_PRE, 0);
  endtask

  initial begin
    sel = 0; cmd = CMD_NOP; row = 0; wdata = '0; bus_we = '0; bus_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // fill every row
    for (int r = 0; r < ROWS; r++) begin
      ref_mem[r] = $urandom;
      issue(CMD_ACT, r);
      issue(CMD_WR, 0, ref_mem[r]);
      issue(CMD_PRE, 0);
    end
    for (int i = 0; i < SR; i++) check("shared row fill", shared_q[i], ref_mem[NREG+i]);
    for (int r = 0; r < ROWS; r++) read_row(r);
    // RowClone: regular -> regular, regular -> shared, shared -> regular
    begin
      int pairs [3][2] = '{'{1, 5}, '{3, NREG}, '{NREG + 1, 7}};
      foreach (pairs[p]) begin
        issue(CMD_ACT, pairs[p][0]);
        issue(CMD_ACT, pairs[p][1]);
        issue(CMD_PRE, 0);
        ref_mem[pairs[p][1]] = ref_mem[pairs[p][0]];
        read_row(pairs[p][1]);
        read_row(pairs[p][0]);
      end
    end
    // bus writes a shared row while an ordinary row is open locally
    issue(CMD_ACT, 2);
    @(negedge clk);
    bus_we = 2'b10; bus_wdata = $urandom; ref_mem[NREG+1] = bus_wdata;
    @(negedge clk);
    bus_we = '0;
    check("bus write", shared_q[1], ref_mem[NREG+1]);
    checks++;
    if (!active || raised_row != 4'd2) begin failures++; $display("local row disturbed"); end
    @(negedge clk); sel = 1; cmd = CMD_RD;
    @(posedge clk); #1; sel = 0; cmd = CMD_NOP;
    check("local row during bus write", rdata, ref_mem[2]);
    issue(CMD_PRE, 0);
    read_row(NREG + 1);
    // without sel nothing happens
    @(negedge clk); sel = 0; cmd = CMD_ACT; row = 4;
    @(negedge clk); cmd = CMD_NOP;
    checks++;
    if (active) begin failures++; $display("unselected ACT opened the subarray"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
