// tb_th_code_management: self-checking test of the time-hopping code memory.
//
// A random code is loaded one value per clock (with gaps in the load strobe)
// while the receiver runs. The testbench checks that complet rises exactly
// after the last value, that code_out_j is 0 while no code is complete, and
// that afterwards it shows the stored values in order, changing only in the
// first cycle of a frame (every Nc*Tc cycles) and wrapping after lg_code
// frames. It then unloads, checks that the code is dropped, loads a code of
// another length (including the full 255 values) and checks again; extra
// load strobes after completion must be ignored.
module tb_th_code_management;
  import uwb_pkg::*;

  logic   clk = 1'b0;
  logic   reset, enable, load, unload;
  param_t longueur_code, code_j, duree_tc, nb_tc;
  logic   complet;
  param_t code_out_j;
  int     checks = 0, failures = 0;
  param_t ref_code [256];

  th_code_management dut (.clk, .reset, .enable, .load, .unload, .longueur_code,
                          .code_j, .duree_tc, .nb_tc, .complet, .code_out_j);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  // Cycle position of the receiver grid, kept by the testbench.
  int tce, nce, gcnt, gidx;
  task automatic tick();
    @(posedge clk); #1;
    if (enable) begin
      if (gcnt == tce - 1) begin
        gcnt = 0;
        gidx = (gidx == nce - 1) ? 0 : gidx + 1;
      end else gcnt++;
    end
  endtask

  // Load a code of len values; returns with complet set.
  task automatic load_code(int len);
    int i;
    longueur_code = param_t'(len);
    i = 0;
    while (i < len) begin
      ref_code[i] = param_t'($urandom);
      load = ($urandom_range(0, 3) != 0);
      code_j = ref_code[i];
      if (i == 0) load = 1'b1;
      check("empty code_out_j", int'(code_out_j), int'(0));
      check("complet low", int'(complet), int'(0));
      tick();
      if (load) i++;
      // The length is taken at the first write.
      longueur_code = param_t'($urandom);
    end
    load = 1'b0;
    check("complet high", int'(complet), int'(1));
  endtask

  // Follow the code over nframes frame boundaries.
  task automatic follow(int len, int nframes);
    int ptr, seen;
    ptr = 0; seen = 0;
    // The pointer restarts at 0 on completion, whatever the frame position.
    while (seen < nframes) begin
      check("code_out_j", int'(code_out_j), int'(ref_code[ptr]));
      // Offer junk values: ignored while complete.
      load = 1'($urandom); code_j = param_t'($urandom);
      if (gcnt == tce - 1 && gidx == nce - 1) begin
        tick();
        ptr = (ptr + 1 == len) ? 0 : ptr + 1;
        seen++;
      end else tick();
    end
    load = 1'b0;
  endtask

  initial begin
    reset = 1'b1; enable = 1'b0; load = 0; unload = 0; longueur_code = 8'd4;
    code_j = '0; duree_tc = 8'd3; nb_tc = 8'd4;
    tce = 3; nce = 4; gcnt = 0; gidx = 0;
    repeat (3) @(posedge clk); #1;
    reset = 1'b0;
    check("reset complet", int'(complet), int'(0));
    enable = 1'b1;
    load_code(5);
    follow(5, 12);
    // Unload: code dropped.
    unload = 1'b1; tick(); unload = 1'b0;
    check("unloaded complet", int'(complet), int'(0));
    check("unloaded code", int'(code_out_j), int'(0));
    // Length zero is no code.
    longueur_code = '0; load = 1'b1; code_j = 8'h55;
    repeat (3) tick();
    check("zero length", int'(complet), int'(0));
    load = 1'b0;
    // Different grid, full-length code.
    enable = 1'b0; tick(); gcnt = 0; gidx = 0;
    duree_tc = 8'd2; nb_tc = 8'd1; tce = 2; nce = 1;
    enable = 1'b1;
    load_code(255);
    follow(255, 300);
    unload = 1'b1; tick(); unload = 1'b0;
    // A one-value code (no hopping) on another grid.
    enable = 1'b0; tick(); gcnt = 0; gidx = 0;
    duree_tc = 8'd7; nb_tc = 8'd3; tce = 7; nce = 3;
    enable = 1'b1;
    load_code(1);
    follow(1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
