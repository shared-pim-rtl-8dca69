// One Shared-PIM bank (the slice of it that lives in one DRAM chip).
//
// NSUB subarrays, each with SHARED_ROWS shared rows, share one BK-bus of
// NSEG segments and one shared-row (GWL) decoder. The bank takes one command
// per clock:
//   ACT / PRE / WR / RD  go to subarray `sa` (row address `row`);
//   GACT                 raises the GWLs of the valid targets (tgt_*), which
//                        the BK-bus senses (first GACT after GPRE) or
//                        overwrites (later GACTs);
//   GPRE                 lowers all GWLs and precharges the BK-bus.
// Because the BK-bus has its own bitlines and sense amplifiers, a subarray
// keeps its local row open and keeps taking local commands while its shared
// rows are read or written over the bus: a transfer does not stall the
// subarrays it passes. Several subarrays can be open at once (MASA). A RD
// returns the row held in the addressed subarray's local sense amplifiers one
// clock later on rdata with rvalid. The structure follows the paper; the
// command encoding and one-clock reaction are this model's own, and the
// timing rules are left to the memory controller.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module shared_pim_bank
  import shared_pim_pkg::*;
#(
  parameter int unsigned NSUB        = NSUB_DEF,
  parameter int unsigned NSEG        = NSEG_DEF,
  parameter int unsigned ROWS        = ROWS_DEF,
  parameter int unsigned SHARED_ROWS = SHARED_ROWS_DEF,
  parameter int unsigned ROW_BITS    = ROW_BITS_DEF,
  parameter int unsigned MAX_GWL     = MAX_GWL_DEF,
  localparam int unsigned SA_W       = $clog2(NSUB),
  localparam int unsigned ROW_W      = $clog2(ROWS),
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  cmd_e                              cmd,
  input  logic [SA_W-1:0]                   sa,
  input  logic [ROW_W-1:0]                  row,
  input  logic [ROW_BITS-1:0]               wdata,
  input  logic [MAX_GWL-1:0]                tgt_valid,
  input  logic [MAX_GWL-1:0][SA_W-1:0]      tgt_sa,
  input  logic [MAX_GWL-1:0][IDX_W-1:0]     tgt_idx,
  output logic [ROW_BITS-1:0]               rdata,
  output logic                              rvalid,
  // status, for observation
  output logic [NSUB-1:0]                   sa_active,
  output logic [NSUB-1:0][SHARED_ROWS-1:0]  gwl_raised,
  output logic                              bus_sensed
);

  logic [NSUB-1:0][SHARED_ROWS-1:0]               gwl_new;
  logic [NSUB-1:0][SHARED_ROWS-1:0][ROW_BITS-1:0] shared_q;
  logic [NSUB-1:0][SHARED_ROWS-1:0]               bus_we;
  logic [NSUB-1:0][ROW_BITS-1:0]                  bus_wdata;
  logic [NSUB-1:0][ROW_BITS-1:0]                  sa_rdata;
  logic [NSUB-1:0]                                sa_rvalid;
  logic [NSUB-1:0][ROW_W-1:0]                     sa_raised_row;
  logic [NSEG-1:0][ROW_BITS-1:0]                  seg_q;

  gwl_decoder #(.NSUB(NSUB), .SHARED_ROWS(SHARED_ROWS), .MAX_GWL(MAX_GWL)) u_gwl (
    .clk        (clk),
    .rst_n      (rst_n),
    .gact       (cmd == CMD_GACT),
    .gpre       (cmd == CMD_GPRE),
    .tgt_valid  (tgt_valid),
    .tgt_sa     (tgt_sa),
    .tgt_idx    (tgt_idx),
    .gwl_new    (gwl_new),
    .gwl_raised (gwl_raised)
  );

  bk_bus #(.NSUB(NSUB), .NSEG(NSEG), .SHARED_ROWS(SHARED_ROWS), .ROW_BITS(ROW_BITS),
           .MAX_GWL(MAX_GWL)) u_bus (
    .clk       (clk),
    .rst_n     (rst_n),
    .gwl_new   (gwl_new),
    .gpre      (cmd == CMD_GPRE),
    .rows_q    (shared_q),
    .bus_we    (bus_we),
    .bus_wdata (bus_wdata),
    .sensed    (bus_sensed),
    .seg_q     (seg_q)
  );

  for (genvar s = 0; s < NSUB; s++) begin : g_sa
    pim_subarray #(.ROWS(ROWS), .SHARED_ROWS(SHARED_ROWS), .ROW_BITS(ROW_BITS)) u_sa (
      .clk        (clk),
      .rst_n      (rst_n),
      .sel        (sa == SA_W'(s)),
      .cmd        (cmd),
      .row        (row),
      .wdata      (wdata),
      .rdata      (sa_rdata[s]),
      .rvalid     (sa_rvalid[s]),
      .bus_we     (bus_we[s]),
      .bus_wdata  (bus_wdata[s]),
      .shared_q   (shared_q[s]),
      .active     (sa_active[s]),
      .raised_row (sa_raised_row[s])
    );
  end

  always_comb begin
    rdata = ROW_BITS'(0);
    for (int s = 0; s < NSUB; s++)
      if (sa_rvalid[s]) rdata = rdata | sa_rdata[s];
  end
  assign rvalid = |sa_rvalid;

  // A shared row is never open through its local wordline while its GWL is
  // being raised.
  for (genvar s = 0; s < NSUB; s++) begin : g_chk
    for (genvar r = 0; r < SHARED_ROWS; r++) begin : g_r
      a_dual_open: assert property (@(posedge clk) disable iff (!rst_n)
        !(gwl_new[s][r] && sa_active[s] && sa_raised_row[s] == ROW_W'(ROWS - SHARED_ROWS + r)));
    end
  end

  // The bus segments are tied together: while the bus holds a value every
  // segment latch holds the same one.
  for (genvar g = 1; g < NSEG; g++) begin : g_seg_chk
    a_seg_tied: assert property (@(posedge clk) disable iff (!rst_n)
      bus_sensed |-> seg_q[g] == seg_q[0]);
  end

endmodule
