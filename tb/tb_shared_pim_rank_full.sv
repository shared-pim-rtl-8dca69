// Full-size testbench: shared_pim_rank with every parameter at its default
// (4 chips x 4 banks, 16 subarrays of 512 rows, 2 shared rows, 4 bus
// segments, 8 KB rank rows, DDR3-1600 timing).
//
// One complete inter-subarray operation per bank pair: in bank 0 an 8 KB row
// moves from subarray 0 row 2 to subarray 15 row 300 (RowClone into a shared
// row, bus copy, RowClone out: 3 x 43 clocks = 161.25 ns, checked exactly),
// while bank 3 broadcasts a shared row of subarray 4 to four subarrays (one
// step, 43 clocks). Both results are read back and compared, and the source
// rows must be unchanged.
module tb_shared_pim_rank_full;
  import shared_pim_pkg::*;
  localparam int unsigned NBANK = NBANK_DEF, NSUB = NSUB_DEF, ROWS = ROWS_DEF;
  localparam int unsigned SR = SHARED_ROWS_DEF, MAXG = MAX_GWL_DEF;
  localparam int unsigned RB = NCHIP_DEF * ROW_BITS_DEF, NREG = ROWS - SR;
  localparam int unsigned STEP = T_GAP_DEF + T_RAS_DEF + T_RP_DEF;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NBANK-1:0] loc_valid, loc_ready;
  cmd_e [NBANK-1:0] loc_cmd;
  logic [NBANK-1:0][3:0] loc_sa;
  logic [NBANK-1:0][8:0] loc_row;
  logic [NBANK-1:0][RB-1:0] loc_wdata, rdata;
  logic [NBANK-1:0] rvalid;
  logic [NBANK-1:0] xfer_valid, xfer_ready, xfer_done;
  xfer_op_e [NBANK-1:0] xfer_op;
  logic [NBANK-1:0][3:0] xfer_src_sa;
  logic [NBANK-1:0][8:0] xfer_src_row, xfer_dst_row;
  logic [NBANK-1:0][0:0] xfer_src_idx;
  logic [NBANK-1:0][MAXG-1:0] xfer_tgt_valid;
  logic [NBANK-1:0][MAXG-1:0][3:0] xfer_tgt_sa;
  logic [NBANK-1:0][MAXG-1:0][0:0] xfer_tgt_idx;
  cmd_e [NBANK-1:0] bank_cmd;
  logic [NBANK-1:0] ev_loc_conflict, ev_xfer_conflict, ev_arb_stall, ev_overlap;

  shared_pim_rank dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [RB-1:0] rnd();
    logic [RB-1:0] v;
    for (int i = 0; i < int'(RB / 32); i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input string what, input logic [RB-1:0] g, input logic [RB-1:0] e);
    checks++;
    if (g !== e) begin failures++; $display("%s: mismatch", what); end
  endtask

  task automatic lop(input int b, input cmd_e c, input int s, input int r,
                     input logic [RB-1:0] d, output logic [RB-1:0] v);
    @(negedge clk);
    loc_valid[b] = 1; loc_cmd[b] = c; loc_sa[b] = 4'(s); loc_row[b] = 9'(r); loc_wdata[b] = d;
    @(posedge clk);
    while (!loc_ready[b]) @(posedge clk);
    @(negedge clk);
    loc_valid[b] = 0;
    v = rdata[b];
  endtask

  task automatic write_row(input int b, input int s, input int r, input logic [RB-1:0] d);
    logic [RB-1:0] u;
    lop(b, CMD_ACT, s, r, '0, u);
    lop(b, CMD_WR, s, 0, d, u);
    lop(b, CMD_PRE, s, 0, '0, u);
  endtask

  task automatic read_row(input int b, input int s, input int r, output logic [RB-1:0] v);
    logic [RB-1:0] u;
    lop(b, CMD_ACT, s, r, '0, u);
    lop(b, CMD_RD, s, 0, '0, v);
    checks++;
    if (!rvalid[b]) begin failures++; $display("no rvalid"); end
    lop(b, CMD_PRE, s, 0, '0, u);
  endtask

  task automatic xop(input int b, input xfer_op_e op, input int ssa, input int sidx,
                     input int srow, input int drow, input int tsa[$], input int tidx[$],
                     input int steps);
    int t0;
    @(negedge clk);
    xfer_valid[b] = 1; xfer_op[b] = op; xfer_src_sa[b] = 4'(ssa); xfer_src_idx[b] = 1'(sidx);
    xfer_src_row[b] = 9'(srow); xfer_dst_row[b] = 9'(drow); xfer_tgt_valid[b] = '0;
    foreach (tsa[i]) begin
      xfer_tgt_valid[b][i] = 1; xfer_tgt_sa[b][i] = 4'(tsa[i]); xfer_tgt_idx[b][i] = 1'(tidx[i]);
    end
    @(posedge clk);
    while (!xfer_ready[b]) @(posedge clk);
    @(negedge clk);
    xfer_valid[b] = 0;
    t0 = -1;
    while (!xfer_done[b]) begin
      @(posedge clk);
      if (t0 < 0 && bank_cmd[b] inside {CMD_ACT, CMD_GACT}) t0 = cyc;
    end
    checks++;
    if (cyc - t0 != steps * int'(STEP)) begin
      failures++; $display("bank %0d transfer took %0d clocks, expected %0d", b, cyc - t0, steps * STEP);
    end else
      $display("bank %0d transfer: %0d clocks (%0d.%02d ns at 1.25 ns)", b, cyc - t0,
               (cyc - t0) * 125 / 100, (cyc - t0) * 125 % 100);
  endtask

  initial begin
    logic [RB-1:0] src, bsrc, v;
    loc_valid = '0; loc_cmd = '{default: CMD_NOP}; loc_sa = '0; loc_row = '0; loc_wdata = '0;
    xfer_valid = '0; xfer_op = '{default: XFER_BUS_COPY}; xfer_src_sa = '0; xfer_src_row = '0;
    xfer_dst_row = '0; xfer_src_idx = '0; xfer_tgt_valid = '0; xfer_tgt_sa = '0; xfer_tgt_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    src = rnd(); bsrc = rnd();
    write_row(0, 0, 2, src);
    write_row(3, 4, NREG + 1, bsrc);
    fork
      xop(0, XFER_FULL_COPY, 0, 0, 2, 300, '{15}, '{1}, 3);
      xop(3, XFER_BUS_COPY, 4, 1, 0, 0, '{0, 7, 11, 15}, '{0, 1, 0, 1}, 1);
    join
    read_row(0, 15, 300, v);         chk("full copy destination", v, src);
    read_row(0, 0, 2, v);            chk("full copy source", v, src);
    read_row(0, 15, NREG + 1, v);    chk("destination shared row", v, src);
    read_row(3, 0, NREG + 0, v);     chk("broadcast 0", v, bsrc);
    read_row(3, 7, NREG + 1, v);     chk("broadcast 7", v, bsrc);
    read_row(3, 11, NREG + 0, v);    chk("broadcast 11", v, bsrc);
    read_row(3, 15, NREG + 1, v);    chk("broadcast 15", v, bsrc);
    read_row(3, 4, NREG + 1, v);     chk("broadcast source", v, bsrc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
