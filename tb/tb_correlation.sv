// tb_correlation: self-checking test of the PPM energy correlator.
//
// Random signed samples are fed for a series of slots with several slot
// lengths (including odd ones and the clamped values 0 and 1). The testbench
// sums the squares of each PPM window itself, with 64-bit arithmetic and
// saturation at 2**32-1, and checks that outm_0/outm_1 show those sums one
// cycle after the last sample of the slot and keep the previous slot's sums
// before that. Some slots use full-scale samples to reach saturation.
module tb_correlation;
  import uwb_pkg::*;

  logic    clk = 1'b0;
  logic    reset, enable;
  param_t  duree_tc;
  sample_t sig;
  corr_t   outm_0, outm_1;
  int      checks = 0, failures = 0;

  correlation dut (.clk, .reset, .enable, .duree_tc, .sig, .outm_0, .outm_1);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic logic [63:0] sat32(logic [63:0] v);
    return (v > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : v;
  endfunction

  task automatic run_slots(int tc_val, int nslots, bit big);
    int tce, half;
    logic [63:0] e0, e1, p0, p1, sq;
    logic signed [31:0] s;
    tce  = (tc_val < 2) ? 2 : tc_val;
    half = tce / 2;
    duree_tc = param_t'(tc_val);
    p0 = 64'(outm_0); p1 = 64'(outm_1);
    for (int n = 0; n < nslots; n++) begin
      e0 = 0; e1 = 0;
      for (int k = 0; k < tce; k++) begin
        if (big) s = $signed($urandom);
        else     s = $signed(32'($urandom_range(0, 4000))) - 2000;
        sig = sample_t'(s);
        sq  = 64'($signed(64'(s)) * $signed(64'(s)));
        if (k < half) e0 = sat32(e0 + sat32(sq));
        else          e1 = sat32(e1 + sat32(sq));
        @(posedge clk); #1;
        if (k != tce - 1) begin
          // Outputs still show the previous slot.
          check("hold outm_0", 64'(outm_0), p0);
          check("hold outm_1", 64'(outm_1), p1);
        end
      end
      check("outm_0", 64'(outm_0), e0);
      check("outm_1", 64'(outm_1), e1);
      p0 = e0; p1 = e1;
    end
  endtask

  initial begin
    reset = 1'b1; enable = 1'b0; duree_tc = 8'd16; sig = '0;
    repeat (3) @(posedge clk); #1;
    check("reset outm_0", 64'(outm_0), 0);
    reset = 1'b0;
    enable = 1'b1;
    run_slots(16, 6, 0);
    run_slots(7, 6, 0);
    run_slots(2, 6, 0);
    run_slots(255, 3, 0);
    run_slots(16, 4, 1);
    // Disable clears the partial sums; restart begins a fresh slot.
    enable = 1'b0; sig = 32'h7fff_ffff;
    repeat (5) @(posedge clk); #1;
    enable = 1'b1;
    run_slots(0, 4, 0);
    run_slots(1, 4, 0);
    run_slots(33, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
