// Transfer engine: turns one data-movement request into the timed command
// sequence a Shared-PIM bank needs.
//
// Every transfer is built from one or more steps of the form
//     ACT1, wait T_GAP, ACT2, wait T_RAS, PRE, wait T_RP
// which is the paper's overlapped copy: the second activation follows the
// first after a short gap (4 ns) instead of a full tRAS, so one step takes
// T_GAP + T_RAS + T_RP clocks (4 + 28 + 11 = 43 clocks = 53.75 ns at
// 1.25 ns; the paper's 52.75 ns uses the exact 4 ns gap).
//   XFER_BUS_COPY   ACT1 = GACT(src shared row), ACT2 = GACT(up to MAX_GWL
//                   destination shared rows, a broadcast if more than one),
//                   PRE = GPRE. The subarrays keep their local rows open.
//   XFER_TRA        ACT1 = GACT(three shared rows), no ACT2, then GPRE after
//                   T_RAS: the three rows end up holding their majority.
//   XFER_ROWCLONE   ACT1 = ACT(src_sa, src_row), ACT2 = ACT(src_sa, dst_row)
//                   as the RowClone second activation, PRE(src_sa).
//   XFER_FULL_COPY  regular row to regular row in another subarray, three
//                   steps: RowClone src_row -> shared row src_idx, bus copy
//                   to shared row tgt_idx[0] of tgt_sa[0], RowClone of that
//                   shared row -> dst_row (3 x 43 clocks; the paper's
//                   non-PIM figure is 158.25 ns = 3 x 52.75 ns).
// Requests use a valid/ready handshake; done pulses for one clock when the
// last T_RP has elapsed. The engine presents one command at a time on
// cmd_* with cmd_valid and moves on only when cmd_grant is high; a command
// held back by the controller (conflict or arbitration) delays the rest of
// the sequence, the waits restart from the actual issue. While a RowClone
// step holds a subarray open, lock_valid/lock_sa name it so that the
// controller keeps other commands away from it. The step structure
// and the timing come from the paper; the encoding of requests and the
// three-step composition of a full copy are this model's choices.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module transfer_engine
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
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // request
  input  logic                          req_valid,
  output logic                          req_ready,
  input  xfer_op_e                      req_op,
  input  logic [SA_W-1:0]               req_src_sa,
  input  logic [ROW_W-1:0]              req_src_row,
  input  logic [IDX_W-1:0]              req_src_idx,
  input  logic [ROW_W-1:0]              req_dst_row,
  input  logic [MAX_GWL-1:0]            req_tgt_valid,
  input  logic [MAX_GWL-1:0][SA_W-1:0]  req_tgt_sa,
  input  logic [MAX_GWL-1:0][IDX_W-1:0] req_tgt_idx,
  output logic                          done,
  // command to the controller
  output logic                          cmd_valid,
  input  logic                          cmd_grant,
  output cmd_e                          cmd,
  output logic                          cmd_rowclone,
  output logic [SA_W-1:0]               cmd_sa,
  output logic [ROW_W-1:0]              cmd_row,
  output logic [MAX_GWL-1:0]            cmd_tgt_valid,
  output logic [MAX_GWL-1:0][SA_W-1:0]  cmd_tgt_sa,
  output logic [MAX_GWL-1:0][IDX_W-1:0] cmd_tgt_idx,
  // subarray held open by a RowClone step of this engine
  output logic                          lock_valid,
  output logic [SA_W-1:0]               lock_sa
);

  localparam int unsigned NREG  = ROWS - SHARED_ROWS;
  localparam int unsigned CNT_W = $clog2(T_GAP + T_RAS + T_RP + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_ACT1, S_GAP, S_ACT2, S_RAS, S_PRE, S_RP, S_DONE
  } state_e;

  typedef enum logic [1:0] {K_ROWCLONE, K_BUS, K_TRA} kind_e;

  state_e                        state;
  logic [CNT_W-1:0]              cnt;
  logic [1:0]                    step;        // step of a full copy (0..2)
  xfer_op_e                      op_q;
  logic [SA_W-1:0]               src_sa_q;
  logic [ROW_W-1:0]              src_row_q, dst_row_q;
  logic [IDX_W-1:0]              src_idx_q;
  logic [MAX_GWL-1:0]            tgt_valid_q;
  logic [MAX_GWL-1:0][SA_W-1:0]  tgt_sa_q;
  logic [MAX_GWL-1:0][IDX_W-1:0] tgt_idx_q;

  // Description of the current step.
  kind_e            kind;
  logic [SA_W-1:0]  rc_sa;
  logic [ROW_W-1:0] rc_from, rc_to;
  logic             last_step;

  always_comb begin
    kind      = K_ROWCLONE;
    rc_sa     = src_sa_q;
    rc_from   = src_row_q;
    rc_to     = dst_row_q;
    last_step = 1'b1;
    unique case (op_q)
      XFER_BUS_COPY: kind = K_BUS;
      XFER_TRA:      kind = K_TRA;
      XFER_ROWCLONE: kind = K_ROWCLONE;
      XFER_FULL_COPY: begin
        last_step = (step == 2'd2);
        if (step == 2'd0) begin
          kind  = K_ROWCLONE;
          rc_to = ROW_W'(NREG) + ROW_W'(src_idx_q);
        end else if (step == 2'd1) begin
          kind  = K_BUS;
        end else begin
          kind    = K_ROWCLONE;
          rc_sa   = tgt_sa_q[0];
          rc_from = ROW_W'(NREG) + ROW_W'(tgt_idx_q[0]);
        end
      end
      default: ;
    endcase
  end

  // Command of the current state.
  always_comb begin
    cmd_valid     = 1'b0;
    cmd           = CMD_NOP;
    cmd_rowclone  = 1'b0;
    cmd_sa        = rc_sa;
    cmd_row       = rc_from;
    cmd_tgt_valid = '0;
    cmd_tgt_sa    = tgt_sa_q;
    cmd_tgt_idx   = tgt_idx_q;
    unique case (state)
      S_ACT1: begin
        cmd_valid = 1'b1;
        if (kind == K_ROWCLONE) begin
          cmd = CMD_ACT;
        end else if (kind == K_BUS) begin
          cmd              = CMD_GACT;
          cmd_tgt_valid    = '0;
          cmd_tgt_valid[0] = 1'b1;
          cmd_tgt_sa[0]    = src_sa_q;
          cmd_tgt_idx[0]   = src_idx_q;
        end else begin
          cmd           = CMD_GACT;
          cmd_tgt_valid = tgt_valid_q;
        end
      end
      S_ACT2: begin
        cmd_valid = 1'b1;
        if (kind == K_ROWCLONE) begin
          cmd          = CMD_ACT;
          cmd_rowclone = 1'b1;
          cmd_row      = rc_to;
        end else begin
          cmd           = CMD_GACT;
          // a full copy moves to the first target only
          cmd_tgt_valid = (op_q == XFER_FULL_COPY) ? MAX_GWL'(1) : tgt_valid_q;
        end
      end
      S_PRE: begin
        cmd_valid = 1'b1;
        cmd       = (kind == K_ROWCLONE) ? CMD_PRE : CMD_GPRE;
      end
      default: ;
    endcase
  end

  assign req_ready  = (state == S_IDLE);
  assign lock_valid = (kind == K_ROWCLONE) &&
                      (state inside {S_GAP, S_ACT2, S_RAS, S_PRE});
  assign lock_sa    = rc_sa;
  assign done      = (state == S_DONE);

  // Wait of t clocks from an issue: the next issue state is reached t clocks
  // after the issuing clock.
  function automatic logic [CNT_W-1:0] wait_cnt(int unsigned t);
    return CNT_W'(t - 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cnt         <= '0;
      step        <= '0;
      op_q        <= XFER_BUS_COPY;
      src_sa_q    <= '0;
      src_row_q   <= '0;
      src_idx_q   <= '0;
      dst_row_q   <= '0;
      tgt_valid_q <= '0;
      tgt_sa_q    <= '0;
      tgt_idx_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          op_q        <= req_op;
          src_sa_q    <= req_src_sa;
          src_row_q   <= req_src_row;
          src_idx_q   <= req_src_idx;
          dst_row_q   <= req_dst_row;
          tgt_valid_q <= req_tgt_valid;
          tgt_sa_q    <= req_tgt_sa;
          tgt_idx_q   <= req_tgt_idx;
          step        <= '0;
          state       <= S_ACT1;
        end
        S_ACT1: if (cmd_grant) begin
          if (kind == K_TRA) begin
            cnt   <= wait_cnt(T_RAS);
            state <= (T_RAS > 1) ? S_RAS : S_PRE;
          end else begin
            cnt   <= wait_cnt(T_GAP);
            state <= (T_GAP > 1) ? S_GAP : S_ACT2;
          end
        end
        S_GAP: begin
          cnt <= cnt - 1'b1;
          if (cnt == CNT_W'(1)) state <= S_ACT2;
        end
        S_ACT2: if (cmd_grant) begin
          cnt   <= wait_cnt(T_RAS);
          state <= (T_RAS > 1) ? S_RAS : S_PRE;
        end
        S_RAS: begin
          cnt <= cnt - 1'b1;
          if (cnt == CNT_W'(1)) state <= S_PRE;
        end
        S_PRE: if (cmd_grant) begin
          cnt   <= wait_cnt(T_RP);
          state <= (T_RP > 1) ? S_RP : (last_step ? S_DONE : S_ACT1);
          if (T_RP <= 1 && !last_step) step <= step + 1'b1;
        end
        S_RP: begin
          cnt <= cnt - 1'b1;
          if (cnt == CNT_W'(1)) begin
            if (last_step) begin
              state <= S_DONE;
            end else begin
              state <= S_ACT1;
              step  <= step + 1'b1;
            end
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A broadcast has at least one destination; a triple activation has three.
  a_req_shape: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && req_ready && req_op == XFER_TRA |-> $countones(req_tgt_valid) == 3);
  a_req_dest: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && req_ready && (req_op == XFER_BUS_COPY || req_op == XFER_FULL_COPY)
      |-> req_tgt_valid != '0);

endmodule
