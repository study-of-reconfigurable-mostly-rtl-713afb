// tb_th_discrimination: self-checking test of the time-hopping slot selector.
//
// The testbench plays the decision block: for every slot s it sends a random
// bit, placed on th_in from the second cycle of slot s+1 as the real decision
// block does. It also plays the code memory: a new random code value (which
// may be out of range) appears on code at the start of each frame. It then
// checks, cycle by cycle, that
//   * rythme_chip pulses exactly in the third cycle of every slot after the
//     first (the second one when Tc = 2 wraps) and out_chip then holds the
//     previous slot's bit: one bit per Tc cycles;
//   * rythme_trame pulses only for the slot whose index equals that frame's
//     code and out_trame holds that slot's bit: one bit per Nc*Tc cycles.
module tb_th_discrimination;
  import uwb_pkg::*;

  logic   clk = 1'b0;
  logic   reset, enable, th_in;
  param_t code, nb_tc, duree_tc;
  logic   out_chip, out_trame, rythme_chip, rythme_trame;
  int     checks = 0, failures = 0;
  int     n_chip = 0, n_trame = 0;

  th_discrimination dut (.clk, .reset, .enable, .th_in, .code, .nb_tc, .duree_tc,
                         .out_chip, .out_trame, .rythme_chip, .rythme_trame);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // Run nframes frames of (tc, nc) from a fresh enable.
  task automatic run(int tc_val, int nc_val, int nframes);
    int tce, nce;
    logic prev_bit, cur_bit;
    int   prev_slot, prev_code, cur_code, last_code;
    bit   have_prev;
    logic exp_chip, exp_trame, exp_chip_val, exp_trame_val;
    tce = (tc_val < 2) ? 2 : tc_val;
    nce = (nc_val < 1) ? 1 : nc_val;
    duree_tc = param_t'(tc_val);
    nb_tc    = param_t'(nc_val);
    enable   = 1'b1;
    have_prev = 0; prev_bit = 0; prev_slot = 0; prev_code = 0; cur_code = 0;
    last_code = 0;
    exp_chip = 0; exp_trame = 0; exp_chip_val = out_chip; exp_trame_val = out_trame;
    for (int f = 0; f <= nframes; f++) begin
      // New code value for this frame: mostly in range.
      last_code = cur_code;
      cur_code  = ($urandom_range(0, 5) == 0) ? nce + $urandom_range(0, 3)
                                                : $urandom_range(0, nce - 1);
      for (int s = 0; s < nce; s++) begin
        cur_bit = 1'($urandom);
        for (int k = 0; k < tce; k++) begin
          if (k == 0) code = param_t'(cur_code);
          if (k == 1 && have_prev) th_in = prev_bit;
          else if (k == 1) th_in = 1'($urandom);
          @(posedge clk); #1;
          // The strobe follows the take cycle (k == 1) by one clock.
          exp_chip = 0; exp_trame = 0;
          if (k == 1 && have_prev) begin
            exp_chip = 1; exp_chip_val = prev_bit;
            if (prev_slot == prev_code) begin
              exp_trame = 1; exp_trame_val = prev_bit;
            end
          end
          check("rythme_chip", rythme_chip, exp_chip);
          check("rythme_trame", rythme_trame, exp_trame);
          if (exp_chip) begin
            check("out_chip", out_chip, exp_chip_val);
            n_chip++;
          end
          if (exp_trame) begin
            check("out_trame", out_trame, exp_trame_val);
            n_trame++;
          end
          if (k == tce - 1) begin
            have_prev = 1; prev_bit = cur_bit; prev_slot = s; prev_code = cur_code;
          end
        end
      end
    end
    enable = 1'b0;
    @(posedge clk); #1;
  endtask

  initial begin
    reset = 1'b1; enable = 1'b0; th_in = 0; code = '0; nb_tc = 8'd4; duree_tc = 8'd8;
    repeat (3) @(posedge clk); #1;
    check("reset chip", rythme_chip, 1'b0);
    reset = 1'b0;
    run(8, 4, 12);
    run(2, 5, 12);
    run(3, 1, 20);
    run(16, 8, 8);
    run(5, 0, 10);
    run(1, 3, 10);
    run(255, 2, 2);
    checks++;
    if (n_trame < 20 || n_chip < 100) begin
      failures++;
      $display("FAIL too few strobes: chip %0d frame %0d", n_chip, n_trame);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
