// Shared-PIM row decoder and GWL drivers of one bank.
//
// A bus activation (gact) carries up to MAX_GWL shared-row addresses, each a
// (subarray, shared-row index) pair with a valid bit. The decoder turns them
// into one-hot global-wordline enables: gwl_new holds the wordlines raised
// by this command (combinational, same clock), and the drivers keep every
// raised wordline high in gwl_raised until gpre lowers them all. The
// address format and the latching of raised wordlines in the driver are this
// model's choices; the paper names the decoder and drivers and limits a
// broadcast to four destination rows, which sets MAX_GWL.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module gwl_decoder #(
  parameter int unsigned NSUB        = shared_pim_pkg::NSUB_DEF,
  parameter int unsigned SHARED_ROWS = shared_pim_pkg::SHARED_ROWS_DEF,
  parameter int unsigned MAX_GWL     = shared_pim_pkg::MAX_GWL_DEF,
  localparam int unsigned SA_W       = $clog2(NSUB),
  localparam int unsigned IDX_W      = (SHARED_ROWS > 1) ? $clog2(SHARED_ROWS) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  gact,
  input  logic                                  gpre,
  input  logic [MAX_GWL-1:0]                    tgt_valid,
  input  logic [MAX_GWL-1:0][SA_W-1:0]          tgt_sa,
  input  logic [MAX_GWL-1:0][IDX_W-1:0]         tgt_idx,
  output logic [NSUB-1:0][SHARED_ROWS-1:0]      gwl_new,
  output logic [NSUB-1:0][SHARED_ROWS-1:0]      gwl_raised
);

  always_comb begin
    gwl_new = '0;
    if (gact) begin
      for (int t = 0; t < MAX_GWL; t++)
        if (tgt_valid[t]) gwl_new[tgt_sa[t]][tgt_idx[t]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      gwl_raised <= '0;
    else if (gpre)   gwl_raised <= '0;
    else             gwl_raised <= gwl_raised | gwl_new;
  end

  a_not_both: assert property (@(posedge clk) disable iff (!rst_n) !(gact && gpre));

endmodule
