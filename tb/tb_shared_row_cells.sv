// Self-checking testbench for shared_row_cells: random writes from the local
// side and the bus side (never to the same row in one clock), compared with
// a reference copy of the rows after every clock.
module tb_shared_row_cells;
  localparam int unsigned SR = 2;
  localparam int unsigned W  = 64;

  logic              clk = 1'b0;
  logic              loc_we;
  logic [0:0]        loc_idx;
  logic [W-1:0]      loc_wdata;
  logic [SR-1:0]     bus_we;
  logic [W-1:0]      bus_wdata;
  logic [SR-1:0][W-1:0] rows_q;
  logic [SR-1:0][W-1:0] ref_rows;
  int checks = 0, failures = 0;

  shared_row_cells #(.SHARED_ROWS(SR), .ROW_BITS(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    loc_we = 0; loc_idx = 0; loc_wdata = '0; bus_we = '0; bus_wdata = '0;
    // put known values in both rows
    for (int i = 0; i < SR; i++) begin
      @(negedge clk);
      bus_we = '0; bus_we[i] = 1'b1;
      bus_wdata = {$urandom, $urandom};
      ref_rows[i] = bus_wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      loc_we    = $urandom_range(0, 1);
      loc_idx   = 1'($urandom_range(0, SR - 1));
      loc_wdata = {$urandom, $urandom};
      bus_we    = SR'($urandom_range(0, (1 << SR) - 1));
      bus_wdata = {$urandom, $urandom};
      if (loc_we) bus_we[loc_idx] = 1'b0;
      for (int i = 0; i < SR; i++) begin
        if (bus_we[i]) ref_rows[i] = bus_wdata;
        else if (loc_we && loc_idx == 1'(i)) ref_rows[i] = loc_wdata;
      end
      @(posedge clk); #1;
      for (int i = 0; i < SR; i++) begin
        checks++;
        if (rows_q[i] !== ref_rows[i]) begin
          failures++;
          $display("row %0d: got %h expected %h", i, rows_q[i], ref_rows[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
