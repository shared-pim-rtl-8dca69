// Shared-PIM common types and constants.
//
// The bank is driven by one DRAM command per cycle. Besides the ordinary
// ACTIVATE / PRECHARGE / column read / column write, two commands act on the
// bank-level bus (BK-bus): GACT raises the global wordline (GWL) of up to
// MAX_GWL shared rows at once and GPRE lowers all GWLs and precharges the
// bus. The defaults follow the paper's DRAM configuration (16 subarrays per
// bank, 512 rows per subarray, two shared rows per subarray, four BK-bus
// segments, four banks and four chips per rank). The timing defaults are
// DDR3-1600 (11-11-11) counted in 1.25 ns command clocks; the 4 ns gap
// between the two bus activations rounds up to 4 clocks (5 ns).
//
// Every module takes its size defaults from here, but each uses only some
// of them, so lint of a single small module reports the rest as unused
// parameters (UNUSEDPARAM). That is expected for a shared package.
package shared_pim_pkg;

  // DRAM command set seen by a bank.
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,   // local wordline ACTIVATE (second ACT while open = RowClone)
    CMD_PRE  = 3'd2,   // local PRECHARGE
    CMD_WR   = 3'd3,   // row-wide write into the local sense amplifiers
    CMD_RD   = 3'd4,   // row-wide read of the local sense amplifiers
    CMD_GACT = 3'd5,   // raise GWLs of shared rows onto the BK-bus
    CMD_GPRE = 3'd6    // lower all GWLs, precharge the BK-bus
  } cmd_e;

  // Transfer operations run by the transfer engine.
  typedef enum logic [1:0] {
    XFER_BUS_COPY  = 2'd0,  // shared row -> up to MAX_GWL shared rows (broadcast)
    XFER_TRA       = 2'd1,  // majority of three shared rows, written to all three
    XFER_ROWCLONE  = 2'd2,  // intra-subarray copy through the local sense amplifiers
    XFER_FULL_COPY = 2'd3   // regular row -> regular row in another subarray
  } xfer_op_e;

  // Paper defaults.
  localparam int unsigned NCHIP_DEF       = 4;
  localparam int unsigned NBANK_DEF       = 4;
  localparam int unsigned NSUB_DEF        = 16;
  localparam int unsigned ROWS_DEF        = 512;
  localparam int unsigned SHARED_ROWS_DEF = 2;
  localparam int unsigned NSEG_DEF        = 4;
  localparam int unsigned MAX_GWL_DEF     = 4;
  // 8 KB rank row split over four chips.
  localparam int unsigned ROW_BITS_DEF    = 16384;

  // DDR3-1600 timing in 1.25 ns clocks.
  localparam int unsigned T_GAP_DEF = 4;   // ACT -> ACT of a copy (paper: 4 ns)
  localparam int unsigned T_RAS_DEF = 28;  // 35 ns
  localparam int unsigned T_RP_DEF  = 11;  // 13.75 ns

endpackage
