// Bank-level bus (BK-bus): the Bus_BL bitlines that run through the whole
// bank and the bank sense amplifiers (BK-SAs) that sense and drive them.
//
// The bus is split into NSEG segments, each with its own row of BK-SAs. The
// segments are tied together through the complementary bus bitlines, so a
// value sensed on one segment appears on all of them at once; the model keeps
// one latch per segment and loads all of them together. Subarray s sits on
// segment s / (NSUB / NSEG).
//
// Operation, one bus activation per clock:
//   precharged bus, new GWLs raised (gwl_new):
//     one row raised   -> the BK-SAs sense that row;
//     three rows raised -> triple-row activation: they sense the bitwise
//                          majority of the three rows.
//     The sensed value is restored into every raised row (bus_we = gwl_new).
//   sensed bus, new GWLs raised:
//     the BK-SAs overwrite the newly raised rows with the held value; one
//     to MAX_GWL destinations at once (copy or broadcast).
//   gpre: the bus returns to the precharged state.
// Write enables and data are combinational in the clock of the activation;
// the rows take them at the edge. The paper gives the segmented structure,
// the sense-then-overwrite copy, broadcasting and triple activation; one
// clock per activation is this model's simplification of the analog timing
// that the memory controller covers with tRAS.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, so lint reports it as a net
// used both asynchronously and synchronously (SYNCASYNCNET). The assertion
// use is simulation-only checking, not hardware; the reset is purely
// asynchronous in the circuit.
module bk_bus #(
  parameter int unsigned NSUB        = shared_pim_pkg::NSUB_DEF,
  parameter int unsigned NSEG        = shared_pim_pkg::NSEG_DEF,
  parameter int unsigned SHARED_ROWS = shared_pim_pkg::SHARED_ROWS_DEF,
  parameter int unsigned ROW_BITS    = shared_pim_pkg::ROW_BITS_DEF,
  parameter int unsigned MAX_GWL     = shared_pim_pkg::MAX_GWL_DEF
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic [NSUB-1:0][SHARED_ROWS-1:0]              gwl_new,
  input  logic                                          gpre,
  input  logic [NSUB-1:0][SHARED_ROWS-1:0][ROW_BITS-1:0] rows_q,
  output logic [NSUB-1:0][SHARED_ROWS-1:0]              bus_we,
  output logic [NSUB-1:0][ROW_BITS-1:0]                 bus_wdata,
  output logic                                          sensed,
  output logic [NSEG-1:0][ROW_BITS-1:0]                 seg_q
);

  localparam int unsigned SUB_PER_SEG = NSUB / NSEG;
  localparam int unsigned CNT_W       = $clog2(NSUB * SHARED_ROWS + 1);

  logic                sense_now;
  logic [CNT_W-1:0]    n_new;
  logic [ROW_BITS-1:0] ge1, ge2, sense_val;

  // Count raised rows and form "at least one" / "at least two" per bitline.
  always_comb begin
    n_new = '0;
    ge1   = ROW_BITS'(0);
    ge2   = ROW_BITS'(0);
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < SHARED_ROWS; r++)
        if (gwl_new[s][r]) begin
          n_new = n_new + CNT_W'(1);
          ge2   = ge2 | (ge1 & rows_q[s][r]);
          ge1   = ge1 | rows_q[s][r];
        end
    sense_val = (n_new == CNT_W'(3)) ? ge2 : ge1;
  end

  assign sense_now = !sensed && (gwl_new != '0);
  assign bus_we    = gwl_new;

  always_comb begin
    for (int s = 0; s < NSUB; s++)
      bus_wdata[s] = sense_now ? sense_val : seg_q[s / SUB_PER_SEG];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sensed <= 1'b0;
      seg_q  <= (NSEG * ROW_BITS)'(0);
    end else if (gpre) begin
      sensed <= 1'b0;
    end else if (sense_now) begin
      sensed <= 1'b1;
      for (int g = 0; g < NSEG; g++) seg_q[g] <= sense_val;
    end
  end

  // Sensing from a precharged bus needs one source row or three (majority).
  a_sense_count: assert property (@(posedge clk) disable iff (!rst_n)
    sense_now |-> (n_new == CNT_W'(1) || n_new == CNT_W'(3)));
  // A broadcast reaches at most MAX_GWL destination rows.
  a_dest_count: assert property (@(posedge clk) disable iff (!rst_n)
    sensed && gwl_new != '0 |-> n_new <= CNT_W'(MAX_GWL));

endmodule
