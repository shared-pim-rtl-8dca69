// Shared-PIM rank: NCHIP DRAM chips of NBANK banks each, with one
// Shared-PIM controller per bank.
//
// The chips of a rank work in lock-step: they receive the same command and
// each holds CHIP_ROW_BITS of every row, so a rank row is
// NCHIP * CHIP_ROW_BITS bits wide (4 x 16384 bits = 8 KB in the default
// configuration). Bank b of every chip is driven by controller b; chip c
// stores and returns bits [c*CHIP_ROW_BITS +: CHIP_ROW_BITS] of the rows of
// that bank.
//
// Per bank the rank offers two channels (see shared_pim_controller): a local
// command channel (ACT / PRE / WR / RD, with a row-wide write word and a
// row-wide read word one clock after a RD) and a transfer channel (bus copy
// and broadcast, triple activation, RowClone, full inter-subarray copy).
// Each bank has its own command slot; sharing one rank command bus among
// the banks is left to the host side. The organisation (chips, banks, 16
// subarrays, 4 bus segments, 512 rows, 2 shared rows) follows the paper;
// the per-bank command slot and the 16384-bit chip row are this model's
// reading of it. Assertions check that every chip follows the controller's
// status table (open subarrays, raised GWLs) and that the chips stay in
// lock-step.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module shared_pim_rank
  import shared_pim_pkg::*;
#(
  parameter int unsigned NCHIP         = NCHIP_DEF,
  parameter int unsigned NBANK         = NBANK_DEF,
  parameter int unsigned NSUB          = NSUB_DEF,
  parameter int unsigned NSEG          = NSEG_DEF,
  parameter int unsigned ROWS          = ROWS_DEF,
  parameter int unsigned SHARED_ROWS   = SHARED_ROWS_DEF,
  parameter int unsigned CHIP_ROW_BITS = ROW_BITS_DEF,
  parameter int unsigned MAX_GWL       = MAX_GWL_DEF,
  parameter int unsigned T_GAP         = T_GAP_DEF,
  parameter int unsigned T_RAS         = T_RAS_DEF,
  parameter int unsigned T_RP          = T_RP_DEF,
  localparam int unsigned ROW_BITS     = NCHIP * CHIP_ROW_BITS,
  localparam int unsigned SA_W         = $clog2(NSUB),
  localparam int unsigned ROW_W        = $clog2(ROWS),
  localparam int unsigned IDX_W        = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // local channel, per bank
  input  logic [NBANK-1:0]                           loc_valid,
  output logic [NBANK-1:0]                           loc_ready,
  input  cmd_e [NBANK-1:0]                           loc_cmd,
  input  logic [NBANK-1:0][SA_W-1:0]                 loc_sa,
  input  logic [NBANK-1:0][ROW_W-1:0]                loc_row,
  input  logic [NBANK-1:0][ROW_BITS-1:0]             loc_wdata,
  output logic [NBANK-1:0][ROW_BITS-1:0]             rdata,
  output logic [NBANK-1:0]                           rvalid,
  // transfer channel, per bank
  input  logic [NBANK-1:0]                           xfer_valid,
  output logic [NBANK-1:0]                           xfer_ready,
  input  xfer_op_e [NBANK-1:0]                       xfer_op,
  input  logic [NBANK-1:0][SA_W-1:0]                 xfer_src_sa,
  input  logic [NBANK-1:0][ROW_W-1:0]                xfer_src_row,
  input  logic [NBANK-1:0][IDX_W-1:0]                xfer_src_idx,
  input  logic [NBANK-1:0][ROW_W-1:0]                xfer_dst_row,
  input  logic [NBANK-1:0][MAX_GWL-1:0]              xfer_tgt_valid,
  input  logic [NBANK-1:0][MAX_GWL-1:0][SA_W-1:0]    xfer_tgt_sa,
  input  logic [NBANK-1:0][MAX_GWL-1:0][IDX_W-1:0]   xfer_tgt_idx,
  output logic [NBANK-1:0]                           xfer_done,
  // observation
  output cmd_e [NBANK-1:0]                           bank_cmd,
  output logic [NBANK-1:0]                           ev_loc_conflict,
  output logic [NBANK-1:0]                           ev_xfer_conflict,
  output logic [NBANK-1:0]                           ev_arb_stall,
  output logic [NBANK-1:0]                           ev_overlap
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [SA_W-1:0]               cmd_sa;
    logic [ROW_W-1:0]              cmd_row;
    logic [MAX_GWL-1:0]            cmd_tgt_valid;
    logic [MAX_GWL-1:0][SA_W-1:0]  cmd_tgt_sa;
    logic [MAX_GWL-1:0][IDX_W-1:0] cmd_tgt_idx;
    logic [NCHIP-1:0]              chip_rvalid;
    logic [NSUB-1:0][ROW_W+1:0]    status;
    logic [NSUB-1:0][SHARED_ROWS-1:0] gwl_status;
    logic [NCHIP-1:0][NSUB-1:0]    chip_active;
    logic [NCHIP-1:0][NSUB-1:0][SHARED_ROWS-1:0] chip_gwl;
    logic [NCHIP-1:0]              chip_sensed;

    shared_pim_controller #(
      .NSUB(NSUB), .ROWS(ROWS), .SHARED_ROWS(SHARED_ROWS), .MAX_GWL(MAX_GWL),
      .T_GAP(T_GAP), .T_RAS(T_RAS), .T_RP(T_RP)
    ) u_ctrl (
      .clk              (clk),
      .rst_n            (rst_n),
      .loc_valid        (loc_valid[b]),
      .loc_ready        (loc_ready[b]),
      .loc_cmd          (loc_cmd[b]),
      .loc_sa           (loc_sa[b]),
      .loc_row          (loc_row[b]),
      .xfer_valid       (xfer_valid[b]),
      .xfer_ready       (xfer_ready[b]),
      .xfer_op          (xfer_op[b]),
      .xfer_src_sa      (xfer_src_sa[b]),
      .xfer_src_row     (xfer_src_row[b]),
      .xfer_src_idx     (xfer_src_idx[b]),
      .xfer_dst_row     (xfer_dst_row[b]),
      .xfer_tgt_valid   (xfer_tgt_valid[b]),
      .xfer_tgt_sa      (xfer_tgt_sa[b]),
      .xfer_tgt_idx     (xfer_tgt_idx[b]),
      .xfer_done        (xfer_done[b]),
      .cmd              (bank_cmd[b]),
      .cmd_sa           (cmd_sa),
      .cmd_row          (cmd_row),
      .cmd_tgt_valid    (cmd_tgt_valid),
      .cmd_tgt_sa       (cmd_tgt_sa),
      .cmd_tgt_idx      (cmd_tgt_idx),
      .status           (status),
      .gwl_status       (gwl_status),
      .ev_loc_conflict  (ev_loc_conflict[b]),
      .ev_xfer_conflict (ev_xfer_conflict[b]),
      .ev_arb_stall     (ev_arb_stall[b]),
      .ev_overlap       (ev_overlap[b])
    );

    for (genvar c = 0; c < NCHIP; c++) begin : g_chip
      shared_pim_bank #(
        .NSUB(NSUB), .NSEG(NSEG), .ROWS(ROWS), .SHARED_ROWS(SHARED_ROWS),
        .ROW_BITS(CHIP_ROW_BITS), .MAX_GWL(MAX_GWL)
      ) u_bank (
        .clk        (clk),
        .rst_n      (rst_n),
        .cmd        (bank_cmd[b]),
        .sa         (cmd_sa),
        .row        (cmd_row),
        .wdata      (loc_wdata[b][c*CHIP_ROW_BITS +: CHIP_ROW_BITS]),
        .tgt_valid  (cmd_tgt_valid),
        .tgt_sa     (cmd_tgt_sa),
        .tgt_idx    (cmd_tgt_idx),
        .rdata      (rdata[b][c*CHIP_ROW_BITS +: CHIP_ROW_BITS]),
        .rvalid     (chip_rvalid[c]),
        .sa_active  (chip_active[c]),
        .gwl_raised (chip_gwl[c]),
        .bus_sensed (chip_sensed[c])
      );

      // Every chip follows the controller's status table, and all chips
      // agree with chip 0.
      for (genvar s = 0; s < NSUB; s++) begin : g_chk
        a_table_active: assert property (@(posedge clk) disable iff (!rst_n)
          chip_active[c][s] == status[s][ROW_W+1]);
      end
      a_table_gwl: assert property (@(posedge clk) disable iff (!rst_n)
        chip_gwl[c] == gwl_status);
      a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
        chip_rvalid[c] == chip_rvalid[0] && chip_sensed[c] == chip_sensed[0]);
    end
    // the chips run in lock-step; chip 0 speaks for the rank
    assign rvalid[b] = chip_rvalid[0];
  end

endmodule
