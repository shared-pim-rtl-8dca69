// Workload testbench: the NTT butterfly pipeline on two subarrays of one
// bank, run on shared_pim_rank at a reduced size (2 chips, 1 bank,
// 4 subarrays, 2 bus segments, 16 rows, 64-bit rank rows = four 16-bit
// lanes, default DDR3-1600 timing).
//
// Subarray 0 holds a and c, subarray 1 holds b and d, both hold the twiddle
// row TW. Per round, in every lane, modulo Q:
//   subarray 0: k1 = a * TW, t1 = c + k1, t1 written into its shared row 0
//   subarray 1: k2 = b * TW, t2 = d + k2, t2 written into its shared row 0
//   BK-bus:     move t1 to shared row 1 of subarray 1,
//               move t2 to shared row 1 of subarray 0
//   subarray 0: t1 + t2        subarray 1: t1 - t2
// One shared row of each subarray sends while the other receives. The lane
// arithmetic stands in for the lookup-table compute engine and is done by
// the testbench, which reads operand rows and writes results through the
// local channel; the rank moves every intermediate value between rows and
// subarrays. The modulus Q = 3329 and the row layout are this testbench's
// choice. The results are read back from the array and compared with the
// butterfly computed directly from the inputs. The bus moves must overlap
// local commands (counted), and each move takes at least 43 clocks.
module tb_ntt_butterfly;
  import shared_pim_pkg::*;
  localparam int unsigned NCHIP = 2, NBANK = 1, NSUB = 4, NSEG = 2, ROWS = 16, SR = 2;
  localparam int unsigned CRB = 32, RB = NCHIP * CRB, MAXG = 4, NREG = ROWS - SR;
  localparam int unsigned LANES = RB / 16;
  localparam int unsigned R = 3;       // butterfly rounds
  localparam int unsigned Q = 3329;    // modulus of the lanes
  localparam int unsigned STEP = T_GAP_DEF + T_RAS_DEF + T_RP_DEF;
  // row layout of both subarrays
  localparam int unsigned ROW_X = 0;       // a or b, rows 0..R-1
  localparam int unsigned ROW_Y = 4;       // c or d, rows 4..4+R-1
  localparam int unsigned ROW_TW = 8;
  localparam int unsigned ROW_K = 9;
  localparam int unsigned ROW_OUT = 10;    // results, rows 10..10+R-1

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
  int n_overlap = 0, n_move = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_overlap += int'(ev_overlap[0]);
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [RB-1:0] g, input logic [RB-1:0] e);
    checks++;
    if (g !== e) begin failures++; $display("%s: got %h expected %h", what, g, e); end
  endtask

  // ---- lane arithmetic modulo Q
  function automatic logic [RB-1:0] mulq(input logic [RB-1:0] x, input logic [RB-1:0] y);
    for (int l = 0; l < int'(LANES); l++)
      mulq[l*16 +: 16] = 16'((int'(x[l*16 +: 16]) * int'(y[l*16 +: 16])) % Q);
  endfunction
  function automatic logic [RB-1:0] addq(input logic [RB-1:0] x, input logic [RB-1:0] y);
    for (int l = 0; l < int'(LANES); l++)
      addq[l*16 +: 16] = 16'((int'(x[l*16 +: 16]) + int'(y[l*16 +: 16])) % Q);
  endfunction
  function automatic logic [RB-1:0] subq(input logic [RB-1:0] x, input logic [RB-1:0] y);
    for (int l = 0; l < int'(LANES); l++)
      subq[l*16 +: 16] = 16'((int'(x[l*16 +: 16]) + int'(Q) - int'(y[l*16 +: 16])) % Q);
  endfunction
  function automatic logic [RB-1:0] rndq();
    for (int l = 0; l < int'(LANES); l++) rndq[l*16 +: 16] = 16'($urandom % Q);
  endfunction

  // ---- local channel, one user at a time
  semaphore chan;

  task automatic lop_rd(input cmd_e c, input int s, input int r, input logic [RB-1:0] d,
                        output logic [RB-1:0] v);
    chan.get(1);
    @(negedge clk);
    loc_valid[0] = 1; loc_cmd[0] = c; loc_sa[0] = 2'(s); loc_row[0] = 4'(r); loc_wdata[0] = d;
    @(posedge clk);
    while (!loc_ready[0]) @(posedge clk);
    @(negedge clk);
    loc_valid[0] = 0;
    if (c == CMD_RD) begin
      checks++;
      if (!rvalid[0]) begin failures++; $display("no rvalid"); end
    end
    v = rdata[0];
    chan.put(1);
  endtask

  task automatic lop(input cmd_e c, input int s, input int r = 0, input logic [RB-1:0] d = '0);
    logic [RB-1:0] unused;
    lop_rd(c, s, r, d, unused);
  endtask

  task automatic read_row(input int s, input int r, output logic [RB-1:0] v);
    lop(CMD_ACT, s, r);
    lop_rd(CMD_RD, s, 0, '0, v);
    lop(CMD_PRE, s);
  endtask

  task automatic write_row(input int s, input int r, input logic [RB-1:0] v);
    lop(CMD_ACT, s, r);
    lop(CMD_WR, s, 0, v);
    lop(CMD_PRE, s);
  endtask

  // bus copy of shared row sidx of subarray ssa into shared row didx of dsa
  task automatic move(input int ssa, input int sidx, input int dsa, input int didx);
    int t_start;
    @(negedge clk);
    xfer_valid[0] = 1; xfer_op[0] = XFER_BUS_COPY; xfer_src_sa[0] = 2'(ssa);
    xfer_src_idx[0] = 1'(sidx); xfer_tgt_valid[0] = 4'b0001;
    xfer_tgt_sa[0][0] = 2'(dsa); xfer_tgt_idx[0][0] = 1'(didx);
    @(posedge clk);
    while (!xfer_ready[0]) @(posedge clk);
    @(negedge clk);
    xfer_valid[0] = 0;
    t_start = -1;
    while (!xfer_done[0]) begin
      @(posedge clk);
      if (t_start < 0 && bank_cmd[0] == CMD_GACT) t_start = cyc;
    end
    checks++;
    if (cyc - t_start < int'(STEP)) begin
      failures++; $display("move too fast: %0d clocks", cyc - t_start);
    end
    n_move++;
  endtask

  // ---- the pipeline
  int ready [2] = '{0, 0};     // rounds whose t is in the sender's shared row 0
  int moved [2] = '{0, 0};     // rounds whose t reached the other subarray
  int used  [2] = '{0, 0};     // rounds whose received value was consumed

  task automatic butterfly_side(input int s);
    logic [RB-1:0] x, y, tw, k, t, mine, other;
    for (int i = 0; i < int'(R); i++) begin
      read_row(s, ROW_X + i, x);
      read_row(s, ROW_TW, tw);
      k = mulq(x, tw);
      write_row(s, ROW_K, k);                  // Write k
      read_row(s, ROW_Y + i, y);
      read_row(s, ROW_K, k);
      t = addq(y, k);
      wait (moved[s] >= i);                    // shared row 0 has been sent
      write_row(s, NREG, t);                   // Write t into shared row 0
      ready[s] = i + 1;
      wait (moved[1 - s] > i);                 // partner's t has arrived
      read_row(s, NREG, mine);
      read_row(s, NREG + 1, other);
      used[s] = i + 1;
      write_row(s, ROW_OUT + i, (s == 0) ? addq(mine, other) : subq(other, mine));
    end
  endtask

  task automatic bus_mover();
    for (int i = 0; i < int'(R); i++)
      for (int s = 0; s < 2; s++) begin
        // sender ready, receiver's shared row 1 consumed from the last round
        wait (ready[s] > i && used[1 - s] >= i);
        move(s, 0, 1 - s, 1);
        moved[s] = i + 1;
      end
  endtask

  logic [RB-1:0] X [2][R], Y [2][R], TW;

  initial begin
    logic [RB-1:0] v, t1, t2;
    loc_valid = '0; loc_cmd = '{default: CMD_NOP}; loc_sa = '0; loc_row = '0; loc_wdata = '0;
    xfer_valid = '0; xfer_op = '{default: XFER_BUS_COPY}; xfer_src_sa = '0; xfer_src_row = '0;
    xfer_dst_row = '0; xfer_src_idx = '0; xfer_tgt_valid = '0; xfer_tgt_sa = '0; xfer_tgt_idx = '0;
    chan = new(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    TW = rndq();
    for (int s = 0; s < 2; s++) begin
      write_row(s, ROW_TW, TW);
      for (int i = 0; i < int'(R); i++) begin
        X[s][i] = rndq(); Y[s][i] = rndq();
        write_row(s, ROW_X + i, X[s][i]);
        write_row(s, ROW_Y + i, Y[s][i]);
      end
    end
    fork
      butterfly_side(0);
      butterfly_side(1);
      bus_mover();
    join
    for (int i = 0; i < int'(R); i++) begin
      t1 = addq(Y[0][i], mulq(X[0][i], TW));
      t2 = addq(Y[1][i], mulq(X[1][i], TW));
      read_row(0, ROW_OUT + i, v);
      chk($sformatf("round %0d t1+t2", i), v, addq(t1, t2));
      read_row(1, ROW_OUT + i, v);
      chk($sformatf("round %0d t1-t2", i), v, subq(t1, t2));
    end
    // the sources of the last moves are unchanged
    read_row(0, NREG, v);
    chk("sa0 shared row 0 keeps t1", v, addq(Y[0][R-1], mulq(X[0][R-1], TW)));
    read_row(1, NREG + 1, v);
    chk("sa1 shared row 1 holds t1", v, addq(Y[0][R-1], mulq(X[0][R-1], TW)));
    $display("bus moves %0d, overlapped local commands %0d", n_move, n_overlap);
    checks++;
    if (n_move != 2 * int'(R)) begin failures++; $display("wrong number of moves"); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("never happened: overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
