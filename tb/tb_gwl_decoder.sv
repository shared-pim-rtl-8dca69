// Self-checking testbench for gwl_decoder: random bus activations with one
// to four targets, checked against a reference decode; raised wordlines
// accumulate until a bus precharge clears them.
module tb_gwl_decoder;
  localparam int unsigned NSUB = 16, SR = 2, MAXG = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic gact, gpre;
  logic [MAXG-1:0] tgt_valid;
  logic [MAXG-1:0][3:0] tgt_sa;
  logic [MAXG-1:0][0:0] tgt_idx;
  logic [NSUB-1:0][SR-1:0] gwl_new, gwl_raised, exp_new, exp_raised;
  int checks = 0, failures = 0;

  gwl_decoder #(.NSUB(NSUB), .SHARED_ROWS(SR), .MAX_GWL(MAXG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gact = 0; gpre = 0; tgt_valid = '0; tgt_sa = '0; tgt_idx = '0;
    exp_raised = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      gpre = ($urandom_range(0, 4) == 0);
      gact = !gpre && ($urandom_range(0, 2) != 0);
      for (int t = 0; t < MAXG; t++) begin
        tgt_valid[t] = $urandom_range(0, 1);
        tgt_sa[t]    = 4'($urandom_range(0, NSUB - 1));
        tgt_idx[t]   = 1'($urandom_range(0, SR - 1));
      end
      exp_new = '0;
      if (gact)
        for (int t = 0; t < MAXG; t++)
          if (tgt_valid[t]) exp_new[tgt_sa[t]][tgt_idx[t]] = 1'b1;
      #1;
      checks++;
      if (gwl_new !== exp_new) begin
        failures++; $display("gwl_new %h expected %h", gwl_new, exp_new);
      end
      exp_raised = gpre ? '0 : (exp_raised | exp_new);
      @(posedge clk); #1;
      checks++;
      if (gwl_raised !== exp_raised) begin
        failures++; $display("gwl_raised %h expected %h", gwl_raised, exp_raised);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
