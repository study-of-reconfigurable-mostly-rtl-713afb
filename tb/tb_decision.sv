// tb_decision: self-checking test of the PPM bit decision.
//
// The two correlation inputs are changed at random times within the slots.
// The testbench checks that out_decision takes the value (in_1 > in_0) of the
// inputs present in the first cycle of each slot, and that it does not move
// during the rest of the slot, for several slot lengths.
module tb_decision;
  import uwb_pkg::*;

  logic   clk = 1'b0;
  logic   reset, enable;
  corr_t  in_0, in_1;
  param_t duree_tc;
  logic   out_decision;
  int     checks = 0, failures = 0;

  decision dut (.clk, .reset, .enable, .in_0, .in_1, .duree_tc, .out_decision);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %0b expected %0b", what, $time, got, exp);
    end
  endtask

  task automatic run_slots(int tc_val, int nslots);
    int tce;
    logic exp;
    tce = (tc_val < 2) ? 2 : tc_val;
    duree_tc = param_t'(tc_val);
    for (int n = 0; n < nslots; n++) begin
      for (int k = 0; k < tce; k++) begin
        // Mostly a clear winner; sometimes a tie.
        in_0 = corr_t'($urandom_range(0, 1000));
        in_1 = ($urandom_range(0, 7) == 0) ? in_0 : corr_t'($urandom_range(0, 1000));
        if (k == 0) exp = (in_1 > in_0);
        @(posedge clk); #1;
        check(k == 0 ? "decide" : "hold", out_decision, exp);
      end
    end
  endtask

  initial begin
    reset = 1'b1; enable = 1'b0; duree_tc = 8'd16; in_0 = '0; in_1 = '1;
    repeat (3) @(posedge clk); #1;
    check("reset", out_decision, 1'b0);
    reset = 1'b0;
    // Disabled: no decision is taken.
    repeat (4) @(posedge clk); #1;
    check("disabled", out_decision, 1'b0);
    enable = 1'b1;
    run_slots(16, 20);
    run_slots(5, 20);
    run_slots(2, 20);
    run_slots(1, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
