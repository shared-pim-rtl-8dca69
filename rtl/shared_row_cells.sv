// Shared rows of one subarray: rows of augmented DRAM cells with two access
// transistors. One transistor, gated by the local wordline, connects the cell
// to the subarray's own bitline; the other, gated by the global wordline
// (GWL), connects it to the bank-bus bitline Bus_BL. The cell itself is
// modelled by its digital outcome: its stored row value.
//
// Local port: while the local wordline of row loc_idx is raised, loc_we
// overwrites the row with loc_wdata (restore after sensing, RowClone, or a
// column write). Bus port: every row whose bit is set in bus_we is
// overwritten with bus_wdata (restore after bus sensing, or a bus copy into
// this row). All rows are visible on rows_q. Writes take effect at the clock
// edge. Two shared rows per subarray is the paper's configuration; the
// storage as registers and the write-port priority are this model's own.
// Reading one row from both sides at once is allowed, writing the same row
// from both sides in one cycle is not: the memory controller's conflict
// check keeps a shared row from being opened by both addresses.
module shared_row_cells #(
  parameter int unsigned SHARED_ROWS = shared_pim_pkg::SHARED_ROWS_DEF,
  parameter int unsigned ROW_BITS    = shared_pim_pkg::ROW_BITS_DEF,
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                                   clk,
  // local side
  input  logic                                   loc_we,
  input  logic [IDX_W-1:0]                       loc_idx,
  input  logic [ROW_BITS-1:0]                    loc_wdata,
  // bus side
  input  logic [SHARED_ROWS-1:0]                 bus_we,
  input  logic [ROW_BITS-1:0]                    bus_wdata,
  output logic [SHARED_ROWS-1:0][ROW_BITS-1:0]   rows_q
);

  always_ff @(posedge clk) begin
    for (int i = 0; i < SHARED_ROWS; i++) begin
      if (bus_we[i])
        rows_q[i] <= bus_wdata;
      else if (loc_we && loc_idx == IDX_W'(i))
        rows_q[i] <= loc_wdata;
    end
  end

  // The two access transistors of one cell are never both driving a write.
  a_no_dual_write: assert property (@(posedge clk)
    loc_we |-> !bus_we[loc_idx]);

endmodule
