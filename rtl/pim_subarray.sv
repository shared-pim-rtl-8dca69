// One DRAM subarray of a Shared-PIM bank, modelled at the level of rows.
//
// A subarray holds ROWS rows of ROW_BITS cells, a row decoder and one row of
// local sense amplifiers (the local row buffer). The last SHARED_ROWS row
// addresses are the shared rows (see shared_row_cells), which the BK-bus can
// also reach through their GWL port; the others are ordinary rows held in a
// memory array.
//
// Commands (acting only when sel is high, one per clock, effect at the edge):
//   ACT row  closed subarray: sense the row into the local sense amplifiers
//            (the restore leaves the row unchanged) and keep it raised.
//            open subarray: RowClone-FPM, the raised row is overwritten with
//            what the sense amplifiers hold, and becomes the raised row.
//   WR       load wdata into the sense amplifiers and the raised row (this is
//            where a compute engine next to the sense amplifiers deposits a
//            row-wide result).
//   RD       rdata <= sense amplifiers, rvalid pulses for one clock.
//   PRE      close the subarray.
// Timing between commands (tRAS, tRP) is the memory controller's business;
// this model reacts in one clock. The position of the shared rows at the top
// of the address space, the row-wide WR/RD and the one-clock reaction are
// this model's choices; ACTIVATE, PRECHARGE and RowClone semantics follow
// the paper's description of DRAM operation.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module pim_subarray
  import shared_pim_pkg::*;
#(
  parameter int unsigned ROWS        = ROWS_DEF,
  parameter int unsigned SHARED_ROWS = SHARED_ROWS_DEF,
  parameter int unsigned ROW_BITS    = ROW_BITS_DEF,
  localparam int unsigned ROW_W      = $clog2(ROWS),
  localparam int unsigned NREG       = ROWS - SHARED_ROWS,
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // command port
  input  logic                                 sel,
  input  cmd_e                                 cmd,
  input  logic [ROW_W-1:0]                     row,
  input  logic [ROW_BITS-1:0]                  wdata,
  output logic [ROW_BITS-1:0]                  rdata,
  output logic                                 rvalid,
  // shared rows, bus side
  input  logic [SHARED_ROWS-1:0]               bus_we,
  input  logic [ROW_BITS-1:0]                  bus_wdata,
  output logic [SHARED_ROWS-1:0][ROW_BITS-1:0] shared_q,
  // status
  output logic                                 active,
  output logic [ROW_W-1:0]                     raised_row
);

  logic [ROW_BITS-1:0] mem [NREG];
  logic [ROW_BITS-1:0] lsa;          // local sense amplifiers

  logic                is_act, is_wr;
  logic                row_shared, raised_shared;
  logic [ROW_BITS-1:0] row_value;    // content of the addressed row
  logic                cell_we;      // write into a row this clock
  logic [ROW_W-1:0]    cell_row;
  logic [ROW_BITS-1:0] cell_wdata;

  assign is_act        = sel && (cmd == CMD_ACT);
  assign is_wr         = sel && (cmd == CMD_WR) && active;
  assign row_shared    = (row >= ROW_W'(NREG));
  assign raised_shared = (raised_row >= ROW_W'(NREG));

  always_comb begin
    if (row_shared) row_value = shared_q[IDX_W'(row - ROW_W'(NREG))];
    else            row_value = mem[row];
  end

  // Row write: RowClone (second ACT) writes the sense amplifiers into the
  // newly raised row; WR writes through to the raised row.
  always_comb begin
    cell_we    = 1'b0;
    cell_row   = row;
    cell_wdata = lsa;
    if (is_act && active) begin
      cell_we = 1'b1;
    end else if (is_wr) begin
      cell_we    = 1'b1;
      cell_row   = raised_row;
      cell_wdata = wdata;
    end
  end

  logic cell_row_shared;
  assign cell_row_shared = (cell_row >= ROW_W'(NREG));

  always_ff @(posedge clk) begin
    if (cell_we && !cell_row_shared)
      mem[cell_row] <= cell_wdata;
  end

  shared_row_cells #(.SHARED_ROWS(SHARED_ROWS), .ROW_BITS(ROW_BITS)) u_shared (
    .clk       (clk),
    .loc_we    (cell_we && cell_row_shared),
    .loc_idx   (IDX_W'(cell_row - ROW_W'(NREG))),
    .loc_wdata (cell_wdata),
    .bus_we    (bus_we),
    .bus_wdata (bus_wdata),
    .rows_q    (shared_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      raised_row <= '0;
      rvalid     <= 1'b0;
      lsa        <= ROW_BITS'(0);
      rdata      <= ROW_BITS'(0);
    end else begin
      rvalid <= 1'b0;
      if (sel) begin
        unique case (cmd)
          CMD_ACT: begin
            if (!active) lsa <= row_value;
            active     <= 1'b1;
            raised_row <= row;
          end
          CMD_WR:  if (active) lsa <= wdata;
          CMD_RD: begin
            rdata  <= lsa;
            rvalid <= 1'b1;
          end
          CMD_PRE: active <= 1'b0;
          default: ;
        endcase
      end
    end
  end

  // Column commands only reach an open subarray.
  a_col_needs_open: assert property (@(posedge clk) disable iff (!rst_n)
    sel && (cmd == CMD_WR || cmd == CMD_RD) |-> active);
  // A shared row raised locally is not written from the bus at the same time.
  a_no_bus_on_raised: assert property (@(posedge clk) disable iff (!rst_n)
    active && raised_shared |-> !bus_we[IDX_W'(raised_row - ROW_W'(NREG))]);

endmodule
