// Self-checking testbench for bk_bus. The testbench plays the shared rows:
// it holds their contents and applies the bus write enables the way the
// rows would. Sequences: single-row sense then copy to one row, broadcast to
// four rows, and a triple-row activation whose result is the bitwise
// majority. Every segment latch must hold the sensed value.
module tb_bk_bus;
  localparam int unsigned NSUB = 8, NSEG = 4, SR = 2, W = 64, MAXG = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NSUB-1:0][SR-1:0] gwl_new;
  logic gpre;
  logic [NSUB-1:0][SR-1:0][W-1:0] rows_q;
  logic [NSUB-1:0][SR-1:0] bus_we;
  logic [NSUB-1:0][W-1:0] bus_wdata;
  logic sensed;
  logic [NSEG-1:0][W-1:0] seg_q;
  int checks = 0, failures = 0;
  int n_copy = 0, n_bcast = 0, n_tra = 0;

  bk_bus #(.NSUB(NSUB), .NSEG(NSEG), .SHARED_ROWS(SR), .ROW_BITS(W), .MAX_GWL(MAXG)) dut (.*);

  always #5 clk = ~clk;

  // the shared rows
  always_ff @(posedge clk)
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < SR; r++)
        if (bus_we[s][r]) rows_q[s][r] <= bus_wdata[s];

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  // one bus activation raising the listed rows
  task automatic gact(input int sas[$], input int idxs[$]);
    @(negedge clk);
    gwl_new = '0;
    foreach (sas[i]) gwl_new[sas[i]][idxs[i]] = 1'b1;
    @(negedge clk);
    gwl_new = '0;
  endtask

  task automatic gprech();
    @(negedge clk); gpre = 1; @(negedge clk); gpre = 0;
  endtask

  initial begin
    logic [W-1:0] v, a, b, c, m;
    int s0, s1;
    gwl_new = '0; gpre = 0;
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < SR; r++) rows_q[s][r] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      // copy
      s0 = $urandom_range(0, NSUB - 1);
      s1 = (s0 + 1 + $urandom_range(0, NSUB - 2)) % NSUB;
      v  = rows_q[s0][n % 2];
      gact('{s0}, '{n % 2});
      checks++; if (!sensed) begin failures++; $display("bus not sensed"); end
      for (int g = 0; g < NSEG; g++) chk("segment latch", seg_q[g], v);
      gact('{s1}, '{1 - n % 2});
      chk("copy dest", rows_q[s1][1 - n % 2], v);
      chk("copy src kept", rows_q[s0][n % 2], v);
      n_copy++;
      gprech();
      checks++; if (sensed) begin failures++; $display("bus not precharged"); end
      // broadcast to four rows in four different subarrays
      v = rows_q[0][0];
      gact('{0}, '{0});
      gact('{1, 3, 5, 7}, '{1, 0, 1, 0});
      chk("bcast 1", rows_q[1][1], v);
      chk("bcast 3", rows_q[3][0], v);
      chk("bcast 5", rows_q[5][1], v);
      chk("bcast 7", rows_q[7][0], v);
      n_bcast++;
      gprech();
      // triple-row activation
      rows_q[2][0] = {$urandom, $urandom};
      a = rows_q[2][0]; b = rows_q[4][1]; c = rows_q[6][0];
      m = (a & b) | (a & c) | (b & c);
      gact('{2, 4, 6}, '{0, 1, 0});
      chk("tra row a", rows_q[2][0], m);
      chk("tra row b", rows_q[4][1], m);
      chk("tra row c", rows_q[6][0], m);
      for (int g = 0; g < NSEG; g++) chk("tra segment", seg_q[g], m);
      n_tra++;
      gprech();
    end
    $display("copies=%0d broadcasts=%0d tras=%0d", n_copy, n_bcast, n_tra);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
