// tb_reconf_control: self-checking test of the parameter reconfiguration.
//
// The testbench keeps its own frame grid. It checks the power-up values, then
// issues requests for new Tc/Nc at random points while the receiver runs and
// checks that nothing changes before the end of the current frame, that the
// new values are in force in the cycle after the frame's last cycle (with the
// applied strobe), and that the next frame is counted with them. A request
// made while disabled must take effect one cycle later.
module tb_reconf_control;
  import uwb_pkg::*;

  logic   clk = 1'b0;
  logic   reset, enable, sig_reconf;
  param_t tc_in, nc_in, tc_act, nc_act;
  logic   pending, applied;
  int     checks = 0, failures = 0;

  reconf_control dut (.clk, .reset, .enable, .sig_reconf, .tc_in, .nc_in,
                      .tc_act, .nc_act, .pending, .applied);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s at %0t: got %0d expected %0d", what, $time, got, exp);
    end
  endtask

  int tc_m, nc_m, gcnt, gidx, tc_p, nc_p;
  bit pend_m;

  initial begin
    reset = 1'b1; enable = 1'b0; sig_reconf = 0; tc_in = '0; nc_in = '0;
    repeat (3) @(posedge clk); #1;
    reset = 1'b0;
    check("default tc", int'(tc_act), int'(16));
    check("default nc", int'(nc_act), int'(8));
    // Disabled: applies next cycle.
    tc_in = 8'd4; nc_in = 8'd3; sig_reconf = 1;
    @(posedge clk); #1; sig_reconf = 0;
    check("pending", int'(pending), int'(1));
    check("not yet", int'(tc_act), int'(16));
    @(posedge clk); #1;
    check("applied", int'(applied), int'(1));
    check("tc disabled", int'(tc_act), int'(4));
    check("nc disabled", int'(nc_act), int'(3));
    tc_m = 4; nc_m = 3; pend_m = 0; gcnt = 0; gidx = 0;
    enable = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit last, req;
      int tce, nce;
      tce = (tc_m < 2) ? 2 : tc_m;
      nce = (nc_m < 1) ? 1 : nc_m;
      req = (!pend_m && $urandom_range(0, 40) == 0);
      sig_reconf = req;
      if (req) begin
        tc_in = param_t'($urandom_range(0, 12));
        nc_in = param_t'($urandom_range(0, 6));
      end
      last = (gcnt == tce - 1) && (gidx == nce - 1);
      @(posedge clk); #1;
      // Model of the grid and of the rule.
      if (gcnt == tce - 1) begin
        gcnt = 0;
        gidx = (gidx == nce - 1) ? 0 : gidx + 1;
      end else gcnt++;
      check("applied strobe", int'(applied), int'(pend_m && last));
      if (pend_m && last) begin
        tc_m = tc_p; nc_m = nc_p; pend_m = 0;
      end
      if (req) begin
        tc_p = int'(tc_in); nc_p = int'(nc_in); pend_m = 1;
      end
      check("tc_act", int'(tc_act), int'(tc_m));
      check("nc_act", int'(nc_act), int'(nc_m));
      check("pending", int'(pending), int'(pend_m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
