// Memory-controller status table for one bank, with the shared-row checks.
//
// Multiple subarrays of a bank may be open at once (MASA), so the controller
// keeps per subarray: an "activated" bit, the raised row address, and a
// column-designation bit marking the subarray that column commands go to.
// With 512 rows that is 1 + 9 + 1 = 11 bits per subarray (ENTRY_BITS), the
// figure the paper gives. Shared rows add a second address, the GWL, so the
// table also keeps one raised-GWL bit per shared row.
//
// The table is updated by the command actually issued to the bank (upd_*),
// and it checks NCHK candidate commands per clock, combinationally:
//   ACT    conflicts if the subarray is already open (unless chk_rowclone
//          marks the second ACT of a RowClone, which needs it open), or if the
//          row is a shared row whose GWL is raised;
//   GACT   conflicts if any target shared row is raised by its local wordline;
//   WR/RD  conflict if the subarray is closed;
//   PRE, GPRE, NOP never conflict.
// The split of the 11 bits and the separate GWL bits are this model's
// reading of the paper; the two rules for shared rows are the paper's.
module masa_status_table
  import shared_pim_pkg::*;
#(
  parameter int unsigned NSUB        = NSUB_DEF,
  parameter int unsigned ROWS        = ROWS_DEF,
  parameter int unsigned SHARED_ROWS = SHARED_ROWS_DEF,
  parameter int unsigned MAX_GWL     = MAX_GWL_DEF,
  parameter int unsigned NCHK        = 2,
  localparam int unsigned SA_W       = $clog2(NSUB),
  localparam int unsigned ROW_W      = $clog2(ROWS),
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1,
  localparam int unsigned ENTRY_BITS = 1 + ROW_W + 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // issued command
  input  cmd_e                                   upd_cmd,
  input  logic [SA_W-1:0]                        upd_sa,
  input  logic [ROW_W-1:0]                       upd_row,
  input  logic [MAX_GWL-1:0]                     upd_tgt_valid,
  input  logic [MAX_GWL-1:0][SA_W-1:0]           upd_tgt_sa,
  input  logic [MAX_GWL-1:0][IDX_W-1:0]          upd_tgt_idx,
  // candidate commands
  input  cmd_e             [NCHK-1:0]            chk_cmd,
  input  logic [NCHK-1:0]                        chk_rowclone,
  input  logic [NCHK-1:0][SA_W-1:0]              chk_sa,
  input  logic [NCHK-1:0][ROW_W-1:0]             chk_row,
  input  logic [NCHK-1:0][MAX_GWL-1:0]           chk_tgt_valid,
  input  logic [NCHK-1:0][MAX_GWL-1:0][SA_W-1:0] chk_tgt_sa,
  input  logic [NCHK-1:0][MAX_GWL-1:0][IDX_W-1:0] chk_tgt_idx,
  output logic [NCHK-1:0]                        chk_conflict,
  // table contents
  output logic [NSUB-1:0][ENTRY_BITS-1:0]        entry,
  output logic [NSUB-1:0][SHARED_ROWS-1:0]       gwl
);

  localparam int unsigned NREG = ROWS - SHARED_ROWS;

  logic [NSUB-1:0]            act_q;
  logic [NSUB-1:0][ROW_W-1:0] row_q;
  logic [NSUB-1:0]            des_q;

  for (genvar s = 0; s < NSUB; s++) begin : g_entry
    assign entry[s] = {act_q[s], row_q[s], des_q[s]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0;
      row_q <= '0;
      des_q <= '0;
      gwl   <= '0;
    end else begin
      unique case (upd_cmd)
        CMD_ACT: begin
          act_q[upd_sa] <= 1'b1;
          row_q[upd_sa] <= upd_row;
          des_q         <= '0;
          des_q[upd_sa] <= 1'b1;
        end
        CMD_PRE: begin
          act_q[upd_sa] <= 1'b0;
          des_q[upd_sa] <= 1'b0;
        end
        CMD_GACT: begin
          for (int t = 0; t < MAX_GWL; t++)
            if (upd_tgt_valid[t]) gwl[upd_tgt_sa[t]][upd_tgt_idx[t]] <= 1'b1;
        end
        CMD_GPRE: gwl <= '0;
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int c = 0; c < NCHK; c++) begin
      chk_conflict[c] = 1'b0;
      unique case (chk_cmd[c])
        CMD_ACT: begin
          if (act_q[chk_sa[c]] != chk_rowclone[c]) chk_conflict[c] = 1'b1;
          if (chk_row[c] >= ROW_W'(NREG) &&
              gwl[chk_sa[c]][IDX_W'(chk_row[c] - ROW_W'(NREG))])
            chk_conflict[c] = 1'b1;
        end
        CMD_GACT: begin
          for (int t = 0; t < MAX_GWL; t++)
            if (chk_tgt_valid[c][t] && act_q[chk_tgt_sa[c][t]] &&
                row_q[chk_tgt_sa[c][t]] == ROW_W'(NREG + chk_tgt_idx[c][t]))
              chk_conflict[c] = 1'b1;
        end
        CMD_WR, CMD_RD: if (!act_q[chk_sa[c]]) chk_conflict[c] = 1'b1;
        default: ;
      endcase
    end
  end

endmodule
