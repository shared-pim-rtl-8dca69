// Per-bank Shared-PIM memory-controller support.
//
// Two sources want the bank's command slot:
//   * the local channel (loc_*): ACT / PRE / WR / RD from the compute side,
//     for example a lookup-table engine working in a subarray;
//   * the transfer engine, fed by the transfer channel (xfer_*), which runs
//     bus copies, broadcasts, triple activations and RowClone steps.
// Each clock the controller checks both candidates against the MASA status
// table (masa_status_table) and issues at most one command on cmd_*:
// the transfer engine first, so its timing is kept, then the local command.
// A command that conflicts (a shared row reached by both of its addresses,
// an ACT to an open subarray, a column command to a closed one, any local
// command to a subarray the engine holds open for a RowClone) waits.
// Row data does not pass through the controller: loc_wdata goes straight to
// the bank and is used there only when a WR is issued.
//
// Event outputs, one clock wide, show the mechanisms: ev_loc_conflict and
// ev_xfer_conflict (a candidate held back by the table), ev_arb_stall (a
// local command that lost the slot to the transfer engine) and ev_overlap (a
// local command issued while a bus transfer is in flight, the concurrency
// Shared-PIM is built for). Fixed priority for the transfer engine and the
// event outputs are this model's choices; the checks are the paper's.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module shared_pim_controller
  import shared_pim_pkg::*;
#(
  parameter int unsigned NSUB        = NSUB_DEF,
  parameter int unsigned ROWS        = ROWS_DEF,
  parameter int unsigned SHARED_ROWS = SHARED_ROWS_DEF,
  parameter int unsigned MAX_GWL     = MAX_GWL_DEF,
  parameter int unsigned T_GAP       = T_GAP_DEF,
  parameter int unsigned T_RAS       = T_RAS_DEF,
  parameter int unsigned T_RP        = T_RP_DEF,
  localparam int unsigned SA_W       = $clog2(NSUB),
  localparam int unsigned ROW_W      = $clog2(ROWS),
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1,
  localparam int unsigned ENTRY_BITS = 1 + ROW_W + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // local channel
  input  logic                          loc_valid,
  output logic                          loc_ready,
  input  cmd_e                          loc_cmd,
  input  logic [SA_W-1:0]               loc_sa,
  input  logic [ROW_W-1:0]              loc_row,
  // transfer channel
  input  logic                          xfer_valid,
  output logic                          xfer_ready,
  input  xfer_op_e                      xfer_op,
  input  logic [SA_W-1:0]               xfer_src_sa,
  input  logic [ROW_W-1:0]              xfer_src_row,
  input  logic [IDX_W-1:0]              xfer_src_idx,
  input  logic [ROW_W-1:0]              xfer_dst_row,
  input  logic [MAX_GWL-1:0]            xfer_tgt_valid,
  input  logic [MAX_GWL-1:0][SA_W-1:0]  xfer_tgt_sa,
  input  logic [MAX_GWL-1:0][IDX_W-1:0] xfer_tgt_idx,
  output logic                          xfer_done,
  // bank command
  output cmd_e                          cmd,
  output logic [SA_W-1:0]               cmd_sa,
  output logic [ROW_W-1:0]              cmd_row,
  output logic [MAX_GWL-1:0]            cmd_tgt_valid,
  output logic [MAX_GWL-1:0][SA_W-1:0]  cmd_tgt_sa,
  output logic [MAX_GWL-1:0][IDX_W-1:0] cmd_tgt_idx,
  // status and events
  output logic [NSUB-1:0][ENTRY_BITS-1:0] status,
  output logic [NSUB-1:0][SHARED_ROWS-1:0] gwl_status,
  output logic                          ev_loc_conflict,
  output logic                          ev_xfer_conflict,
  output logic                          ev_arb_stall,
  output logic                          ev_overlap
);

  // transfer engine
  logic                          te_valid, te_grant, te_rowclone;
  cmd_e                          te_cmd;
  logic [SA_W-1:0]               te_sa;
  logic [ROW_W-1:0]              te_row;
  logic [MAX_GWL-1:0]            te_tgt_valid;
  logic [MAX_GWL-1:0][SA_W-1:0]  te_tgt_sa;
  logic [MAX_GWL-1:0][IDX_W-1:0] te_tgt_idx;
  logic                          te_lock_valid;
  logic [SA_W-1:0]               te_lock_sa;

  transfer_engine #(
    .NSUB(NSUB), .ROWS(ROWS), .SHARED_ROWS(SHARED_ROWS), .MAX_GWL(MAX_GWL),
    .T_GAP(T_GAP), .T_RAS(T_RAS), .T_RP(T_RP)
  ) u_te (
    .clk           (clk),
    .rst_n         (rst_n),
    .req_valid     (xfer_valid),
    .req_ready     (xfer_ready),
    .req_op        (xfer_op),
    .req_src_sa    (xfer_src_sa),
    .req_src_row   (xfer_src_row),
    .req_src_idx   (xfer_src_idx),
    .req_dst_row   (xfer_dst_row),
    .req_tgt_valid (xfer_tgt_valid),
    .req_tgt_sa    (xfer_tgt_sa),
    .req_tgt_idx   (xfer_tgt_idx),
    .done          (xfer_done),
    .cmd_valid     (te_valid),
    .cmd_grant     (te_grant),
    .cmd           (te_cmd),
    .cmd_rowclone  (te_rowclone),
    .cmd_sa        (te_sa),
    .cmd_row       (te_row),
    .cmd_tgt_valid (te_tgt_valid),
    .cmd_tgt_sa    (te_tgt_sa),
    .cmd_tgt_idx   (te_tgt_idx),
    .lock_valid    (te_lock_valid),
    .lock_sa       (te_lock_sa)
  );

  // status table, checking both candidates
  cmd_e [1:0]                          chk_cmd;
  logic [1:0]                          chk_conflict;
  logic                                bus_busy;
  logic                                loc_issue;

  assign chk_cmd[0] = te_valid  ? te_cmd  : CMD_NOP;
  assign chk_cmd[1] = loc_valid ? loc_cmd : CMD_NOP;

  masa_status_table #(
    .NSUB(NSUB), .ROWS(ROWS), .SHARED_ROWS(SHARED_ROWS), .MAX_GWL(MAX_GWL), .NCHK(2)
  ) u_tab (
    .clk           (clk),
    .rst_n         (rst_n),
    .upd_cmd       (cmd),
    .upd_sa        (cmd_sa),
    .upd_row       (cmd_row),
    .upd_tgt_valid (cmd_tgt_valid),
    .upd_tgt_sa    (cmd_tgt_sa),
    .upd_tgt_idx   (cmd_tgt_idx),
    .chk_cmd       (chk_cmd),
    .chk_rowclone  ({1'b0, te_rowclone}),
    .chk_sa        ({loc_sa, te_sa}),
    .chk_row       ({loc_row, te_row}),
    .chk_tgt_valid ({MAX_GWL'(0), te_tgt_valid}),
    .chk_tgt_sa    ({te_tgt_sa, te_tgt_sa}),
    .chk_tgt_idx   ({te_tgt_idx, te_tgt_idx}),
    .chk_conflict  (chk_conflict),
    .entry         (status),
    .gwl           (gwl_status)
  );

  // the local candidate also waits for a subarray the engine holds open
  logic loc_conflict;
  assign loc_conflict = chk_conflict[1] || (te_lock_valid && loc_sa == te_lock_sa);

  assign te_grant  = te_valid && !chk_conflict[0];
  assign loc_issue = loc_valid && !loc_conflict && !te_grant;
  assign loc_ready = loc_issue;

  always_comb begin
    cmd           = CMD_NOP;
    cmd_sa        = loc_sa;
    cmd_row       = loc_row;
    cmd_tgt_valid = '0;
    cmd_tgt_sa    = te_tgt_sa;
    cmd_tgt_idx   = te_tgt_idx;
    if (te_grant) begin
      cmd           = te_cmd;
      cmd_sa        = te_sa;
      cmd_row       = te_row;
      cmd_tgt_valid = te_tgt_valid;
    end else if (loc_issue) begin
      cmd = loc_cmd;
    end
  end

  // a bus transfer is in flight while any GWL is raised
  assign bus_busy         = (gwl_status != '0);
  assign ev_loc_conflict  = loc_valid && loc_conflict;
  assign ev_xfer_conflict = te_valid && chk_conflict[0];
  assign ev_arb_stall     = loc_valid && !loc_conflict && te_grant;
  assign ev_overlap       = loc_issue && bus_busy;

  // The local channel carries only local commands.
  a_loc_cmds: assert property (@(posedge clk) disable iff (!rst_n)
    loc_valid |-> loc_cmd inside {CMD_ACT, CMD_PRE, CMD_WR, CMD_RD});

endmodule
