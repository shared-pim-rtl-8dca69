// End-to-end testbench for shared_pim_rank at a reduced size (2 chips,
// 2 banks, 4 subarrays, 2 bus segments, 16 rows, 64-bit rank rows, default
// DDR3-1600 timing).
//
// Bank 0 runs the two-subarray pipeline of a matrix-multiply segment:
// subarray 0 forms t_i = A_i * B_i, subarray 1 forms u_i = C_i * D_i, and
// t_i travels to subarray 1 over the BK-bus to be added there. The two
// shared rows alternate: one is in transit while the next product is
// written into the other, so subarray 0 never waits for a transfer. The
// arithmetic itself (16-bit lanes) stands in for the lookup-table compute
// engine and is done by the testbench, which reads operand rows and writes
// results through the local channel.
//
// Bank 1, at the same time, runs a full inter-subarray copy, a RowClone, a
// broadcast to three subarrays, a triple-row activation, and two forced
// conflicts (local ACT on a shared row under a raised GWL; bus copy into a
// shared row that is open locally). All rows of bank 1 are then read back
// against a reference model, and the bank-0 sums against A*B + C*D.
//
// Every mechanism is counted and a failure is counted for any that never
// happened: bus copy, broadcast, triple activation, RowClone, full copy,
// local/transfer overlap, arbitration stall, both conflict kinds, and
// transfers in flight in both banks at once. Transfer latencies are checked
// against 43 clocks per step.
module tb_shared_pim_rank;
  import shared_pim_pkg::*;
  localparam int unsigned NCHIP = 2, NBANK = 2, NSUB = 4, NSEG = 2, ROWS = 16, SR = 2;
  localparam int unsigned CRB = 32, RB = NCHIP * CRB, MAXG = 4, NREG = ROWS - SR;
  localparam int unsigned K = 4;      // pipeline length in bank 0
  localparam int unsigned STEP = T_GAP_DEF + T_RAS_DEF + T_RP_DEF;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NBANK-1:0] loc_valid, loc_ready;
  cmd_e [NBANK-1:0] loc_cmd;
  logic [NBANK-1:0][1:0] loc_sa;
  logic [NBANK-1:0][3:0] loc_row;
  logic [NBANK-1:0][RB-1:0] loc_wdata, rdata;
  logic [NBANK-1:0] rvalid;
  logic [NBANK-1:0] xfer_valid, xfer_ready, xfer_done;
  xfer_op_e [NBANK-1:0] xfer_op;
  logic [NBANK-1:0][1:0] xfer_src_sa;
  logic [NBANK-1:0][3:0] xfer_src_row, xfer_dst_row;
  logic [NBANK-1:0][0:0] xfer_src_idx;
  logic [NBANK-1:0][MAXG-1:0] xfer_tgt_valid;
  logic [NBANK-1:0][MAXG-1:0][1:0] xfer_tgt_sa;
  logic [NBANK-1:0][MAXG-1:0][0:0] xfer_tgt_idx;
  cmd_e [NBANK-1:0] bank_cmd;
  logic [NBANK-1:0] ev_loc_conflict, ev_xfer_conflict, ev_arb_stall, ev_overlap;

  shared_pim_rank #(.NCHIP(NCHIP), .NBANK(NBANK), .NSUB(NSUB), .NSEG(NSEG), .ROWS(ROWS),
                    .SHARED_ROWS(SR), .CHIP_ROW_BITS(CRB), .MAX_GWL(MAXG)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_loc_conf = 0, n_xfer_conf = 0, n_arb = 0, n_overlap = 0, n_both_banks = 0;
  int n_copy = 0, n_bcast = 0, n_tra = 0, n_rc = 0, n_full = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int b = 0; b < NBANK; b++) begin
      n_loc_conf  += int'(ev_loc_conflict[b]);
      n_xfer_conf += int'(ev_xfer_conflict[b]);
      n_arb       += int'(ev_arb_stall[b]);
      n_overlap   += int'(ev_overlap[b]);
    end
    if (rst_n && xfer_ready == '0) n_both_banks++;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [RB-1:0] g, input logic [RB-1:0] e);
    checks++;
    if (g !== e) begin failures++; $display("%s: got %h expected %h", what, g, e); end
  endtask

  // ---- lane arithmetic standing in for the compute engine
  function automatic logic [RB-1:0] mul16(input logic [RB-1:0] x, input logic [RB-1:0] y);
    for (int l = 0; l < RB / 16; l++) mul16[l*16 +: 16] = x[l*16 +: 16] * y[l*16 +: 16];
  endfunction
  function automatic logic [RB-1:0] add16(input logic [RB-1:0] x, input logic [RB-1:0] y);
    for (int l = 0; l < RB / 16; l++) add16[l*16 +: 16] = x[l*16 +: 16] + y[l*16 +: 16];
  endfunction
  function automatic logic [RB-1:0] rnd();
    return {$urandom, $urandom};
  endfunction

  // ---- local channel, one user at a time per bank
  semaphore chan [NBANK];

  task automatic lop(input int b, input cmd_e c, input int s, input int r = 0,
                     input logic [RB-1:0] d = '0);
    logic [RB-1:0] unused;
    lop_rd(b, c, s, r, d, unused);
  endtask

  task automatic lop_rd(input int b, input cmd_e c, input int s, input int r,
                        input logic [RB-1:0] d, output logic [RB-1:0] v);
    chan[b].get(1);
    @(negedge clk);
    loc_valid[b] = 1; loc_cmd[b] = c; loc_sa[b] = 2'(s); loc_row[b] = 4'(r); loc_wdata[b] = d;
    @(posedge clk);
    while (!loc_ready[b]) @(posedge clk);
    @(negedge clk);
    loc_valid[b] = 0;
    if (c == CMD_RD) begin
      checks++;
      if (!rvalid[b]) begin failures++; $display("bank %0d: no rvalid", b); end
    end
    v = rdata[b];
    chan[b].put(1);
  endtask

  task automatic read_row(input int b, input int s, input int r, output logic [RB-1:0] v);
    lop(b, CMD_ACT, s, r);
    lop_rd(b, CMD_RD, s, 0, '0, v);
    lop(b, CMD_PRE, s);
  endtask

  task automatic write_row(input int b, input int s, input int r, input logic [RB-1:0] v);
    lop(b, CMD_ACT, s, r);
    lop(b, CMD_WR, s, 0, v);
    lop(b, CMD_PRE, s);
  endtask

  // ---- transfer channel: returns after done, checks the latency
  task automatic xop(input int b, input xfer_op_e op, input int ssa, input int sidx,
                     input int srow, input int drow, input int tsa[$], input int tidx[$]);
    int t_start, steps;
    @(negedge clk);
    xfer_valid[b] = 1; xfer_op[b] = op; xfer_src_sa[b] = 2'(ssa); xfer_src_idx[b] = 1'(sidx);
    xfer_src_row[b] = 4'(srow); xfer_dst_row[b] = 4'(drow); xfer_tgt_valid[b] = '0;
    foreach (tsa[i]) begin
      xfer_tgt_valid[b][i] = 1; xfer_tgt_sa[b][i] = 2'(tsa[i]); xfer_tgt_idx[b][i] = 1'(tidx[i]);
    end
    @(posedge clk);
    while (!xfer_ready[b]) @(posedge clk);
    @(negedge clk);
    xfer_valid[b] = 0;
    t_start = -1;
    while (!xfer_done[b]) begin
      @(posedge clk);
      if (t_start < 0 && (bank_cmd[b] == CMD_ACT || bank_cmd[b] == CMD_GACT)) t_start = cyc;
    end
    steps = (op == XFER_FULL_COPY) ? 3 : 1;
    checks++;
    // latency from the first activation; a conflict may only add to it
    if (op != XFER_TRA && cyc - t_start < steps * STEP) begin
      failures++; $display("transfer too fast: %0d", cyc - t_start);
    end
    case (op)
      XFER_BUS_COPY:  if (tsa.size() > 1) n_bcast++; else n_copy++;
      XFER_TRA:       n_tra++;
      XFER_ROWCLONE:  n_rc++;
      XFER_FULL_COPY: n_full++;
      default: ;
    endcase
  endtask

  // ---- bank 0: matrix-multiply pipeline
  logic [RB-1:0] A [K], B [K], C [K], D [K];
  int produced = 0, moved = 0, consumed = 0, exact_copy_lat = 0;

  task automatic bank0_producer();
    logic [RB-1:0] x, y;
    for (int i = 0; i < int'(K); i++) begin
      read_row(0, 0, i, x);
      read_row(0, 0, 4 + i, y);
      // the shared row i%2 is free once transfer i-2 has left it
      wait (moved >= i - 1);
      write_row(0, 0, NREG + i % 2, mul16(x, y));
      produced = i + 1;
    end
  endtask

  task automatic bank0_mover();
    for (int i = 0; i < int'(K); i++) begin
      wait (produced > i && consumed >= i - 1);
      xop(0, XFER_BUS_COPY, 0, i % 2, 0, 0, '{1}, '{i % 2});
      moved = i + 1;
    end
  endtask

  task automatic bank0_consumer();
    logic [RB-1:0] x, y, t;
    for (int i = 0; i < int'(K); i++) begin
      read_row(0, 1, i, x);
      read_row(0, 1, 4 + i, y);
      wait (moved > i);
      read_row(0, 1, NREG + i % 2, t);
      consumed = i + 1;
      write_row(0, 1, 8 + i, add16(t, mul16(x, y)));
    end
  endtask

  // ---- bank 1: the other transfers, against a reference
  logic [RB-1:0] ref1 [NSUB][ROWS];

  task automatic bank1_script();
    logic [RB-1:0] a, b, c;
    // full copy: sa0 row 2 -> sa3 row 5 through shared rows sa0.1 and sa3.0
    xop(1, XFER_FULL_COPY, 0, 1, 2, 5, '{3}, '{0});
    ref1[0][NREG+1] = ref1[0][2]; ref1[3][NREG] = ref1[0][2]; ref1[3][5] = ref1[0][2];
    // RowClone inside sa1: row 1 -> row 4
    xop(1, XFER_ROWCLONE, 1, 0, 1, 4, '{0}, '{0});
    ref1[1][4] = ref1[1][1];
    // broadcast sa2.0 -> sa0.0, sa1.1, sa3.1, while sa1 row 2 is read
    // back to back through the local channel
    lop(1, CMD_ACT, 1, 2);
    fork
      xop(1, XFER_BUS_COPY, 2, 0, 0, 0, '{0, 1, 3}, '{0, 1, 1});
      begin
        // RD held valid every clock for 60 clocks
        chan[1].get(1);
        @(negedge clk);
        loc_valid[1] = 1; loc_cmd[1] = CMD_RD; loc_sa[1] = 2'(1);
        for (int n = 0; n < 60; n++) begin
          @(negedge clk);
          if (rvalid[1]) chk("local read during broadcast", rdata[1], ref1[1][2]);
        end
        loc_valid[1] = 0;
        chan[1].put(1);
      end
    join
    lop(1, CMD_PRE, 1);
    ref1[0][NREG] = ref1[2][NREG]; ref1[1][NREG+1] = ref1[2][NREG]; ref1[3][NREG+1] = ref1[2][NREG];
    // triple activation of sa0.1, sa1.0, sa2.1
    a = ref1[0][NREG+1]; b = ref1[1][NREG]; c = ref1[2][NREG+1];
    xop(1, XFER_TRA, 0, 0, 0, 0, '{0, 1, 2}, '{1, 0, 1});
    ref1[0][NREG+1] = (a & b) | (a & c) | (b & c);
    ref1[1][NREG]   = ref1[0][NREG+1];
    ref1[2][NREG+1] = ref1[0][NREG+1];
    // forced local conflict: ACT of sa1.shared0 while the bus copy into it runs
    fork
      xop(1, XFER_BUS_COPY, 2, 1, 0, 0, '{1}, '{0});
      begin
        repeat (8) @(negedge clk);
        read_row(1, 1, NREG, a);     // waits for the GPRE, then sees the new value
        chk("read after the bus copy", a, ref1[2][NREG+1]);
      end
    join
    ref1[1][NREG] = ref1[2][NREG+1];
    // forced transfer conflict: sa3.shared1 open locally, bus copy into it
    lop(1, CMD_ACT, 3, NREG + 1);
    fork
      xop(1, XFER_BUS_COPY, 0, 0, 0, 0, '{3}, '{1});
      begin
        repeat (15) @(negedge clk);
        lop(1, CMD_PRE, 3);
      end
    join
    ref1[3][NREG+1] = ref1[0][NREG];
  endtask

  initial begin
    logic [RB-1:0] v;
    loc_valid = '0; loc_cmd = '{default: CMD_NOP}; loc_sa = '0; loc_row = '0; loc_wdata = '0;
    xfer_valid = '0; xfer_op = '{default: XFER_BUS_COPY}; xfer_src_sa = '0; xfer_src_row = '0;
    xfer_dst_row = '0; xfer_src_idx = '0; xfer_tgt_valid = '0; xfer_tgt_sa = '0; xfer_tgt_idx = '0;
    foreach (chan[b]) chan[b] = new(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initial contents
    fork
      for (int i = 0; i < int'(K); i++) begin
        A[i] = rnd(); B[i] = rnd(); C[i] = rnd(); D[i] = rnd();
        write_row(0, 0, i, A[i]); write_row(0, 0, 4 + i, B[i]);
        write_row(0, 1, i, C[i]); write_row(0, 1, 4 + i, D[i]);
      end
      for (int s = 0; s < int'(NSUB); s++)
        for (int r = 0; r < int'(ROWS); r++) begin
          ref1[s][r] = rnd();
          write_row(1, s, r, ref1[s][r]);
        end
    join
    // both banks at work
    fork
      bank0_producer();
      bank0_mover();
      bank0_consumer();
      bank1_script();
    join
    // results
    for (int i = 0; i < int'(K); i++) begin
      read_row(0, 1, 8 + i, v);
      chk($sformatf("bank0 sum %0d", i), v, add16(mul16(A[i], B[i]), mul16(C[i], D[i])));
    end
    for (int s = 0; s < int'(NSUB); s++)
      for (int r = 0; r < int'(ROWS); r++) begin
        read_row(1, s, r, v);
        chk($sformatf("bank1 row %0d.%0d", s, r), v, ref1[s][r]);
      end
    // every mechanism happened
    begin
      string names [10] = '{"bus copy", "broadcast", "triple activation", "RowClone", "full copy",
                            "overlap", "arbitration stall", "local conflict", "transfer conflict",
                            "both banks transferring"};
      int cnt [10];
      cnt = '{n_copy, n_bcast, n_tra, n_rc, n_full, n_overlap, n_arb, n_loc_conf, n_xfer_conf,
              n_both_banks};
      foreach (cnt[i]) begin
        $display("%-24s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("never happened: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
