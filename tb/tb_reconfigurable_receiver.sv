// tb_reconfigurable_receiver: end-to-end test of the reconfigurable TH-PPM
// receiver at its default sizes.
//
// The testbench acts as transmitter, channel and ADC, and as the MAC layer.
// Every time slot carries one PPM pulse (two samples of random polarity, at
// the start of the slot's first half for a 0 and of its second half for a 1)
// plus small random noise, so the chip-rate output can be checked bit by bit.
// An independent model of the slot/frame grid, of the TH code memory and of
// the reconfiguration rule gives, for every clock, whether a chip-rate and a
// frame-rate strobe are due and which bit they must carry.
//
// The run goes through: reception with the power-up Tc/Nc and no TH code;
// loading a TH code while receiving; data-rate reconfigurations while
// receiving (Tc and Nc change at a frame boundary); replacing the TH code
// (unload, then load); a code value outside the frame, which gives no
// frame-rate bit; full-scale pulses that saturate the correlator; a
// reconfiguration while disabled; and a stop/restart of the receiver. Each of
// these is counted, and one that never happened counts as a failure.
module tb_reconfigurable_receiver;
  import uwb_pkg::*;

  logic    CLK = 1'b0;
  logic    RESET, Renable, load_code, unload_code, sig_reconf;
  sample_t signal_recu;
  param_t  lg_code, code_j_data, nb_Tc_par_trame_TH, Tc;
  logic    out_recepteur_trame, out_recepteur_chip;
  logic    rythme_out_recepteur_chip, rythme_out_recepteur_trame;

  reconfigurable_receiver dut (.*);

  always #5 CLK = ~CLK;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge CLK);
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

  // ---------------- model state ----------------
  int  tc_m = 16, nc_m = 8;          // power-up values of the receiver
  int  tc_p, nc_p;
  bit  pend_m = 0;
  int  gcnt = 0, gidx = 0;
  bit  primed_m = 0;
  bit  slot_bit;
  int  frame_code_m = 0;
  bit  code_done_m = 0;
  int  code_len_m = 0, code_ptr_m = 0, code_wr_m = 0;
  int  code_m [256];
  bit  big_pulses = 0;
  // slots completed, not yet output: {bit, slot index, frame code}
  typedef struct { bit b; int slot; int code; } slot_t;
  slot_t done_q [$];

  // scenario inputs
  int  load_vals [$];

  // mechanism counters
  int n_chip = 0, n_frame = 0, n_code_load = 0, n_code_replace = 0;
  int n_reconf_run = 0, n_reconf_idle = 0, n_rate_change = 0, n_nc_change = 0;
  int n_out_of_frame = 0, n_saturated = 0, n_restart = 0, n_tc_clamp = 0;

  // One clock: drive inputs, let the edge pass, check outputs, update model.
  task automatic cycle(bit req = 0, int new_tc = 0, int new_nc = 0, bit unload = 0);
    int tce, nce, half, pos, amp;
    bit last_slot, last_frame, take, writing;
    int sample;
    tce  = (tc_m < 2) ? 2 : tc_m;
    nce  = (nc_m < 1) ? 1 : nc_m;
    half = tce / 2;
    // Transmitter: a new bit at the start of each slot.
    if (gcnt == 0) slot_bit = 1'($urandom);
    pos = slot_bit ? half : 0;
    amp = big_pulses ? 32'h7fff_ffff : 3000;
    sample = $urandom_range(0, 100) - 50;
    if (gcnt == pos) sample = amp;
    else if (gcnt == pos + 1 && gcnt < (slot_bit ? tce : half)) sample = -(amp / 2);
    signal_recu = sample_t'(sample);
    // MAC inputs.
    sig_reconf = req;
    if (req) begin
      Tc = param_t'(new_tc); nb_Tc_par_trame_TH = param_t'(new_nc);
    end
    unload_code = unload;
    writing = 0;
    if (!unload && load_vals.size() > 0 && !code_done_m) begin
      load_code = 1'b1; code_j_data = param_t'(load_vals[0]);
      if (code_wr_m == 0) lg_code = param_t'(load_vals.size());
      else lg_code = param_t'($urandom);   // taken at the first write only
      writing = 1;
    end else begin
      load_code = 1'b0; code_j_data = param_t'($urandom);
    end
    // Model decisions from the state before the edge.
    last_slot  = Renable && (gcnt == tce - 1);
    last_frame = last_slot && (gidx == nce - 1);
    take       = Renable && primed_m && (gcnt == 1);
    if (Renable && gcnt == 0 && gidx == 0)
      frame_code_m = code_done_m ? code_m[code_ptr_m] : 0;
    @(posedge CLK); #1;
    // ---- checks ----
    check("rythme_chip", int'(rythme_out_recepteur_chip), int'(take));
    if (take) begin
      slot_t s;
      if (done_q.size() != 1) begin
        failures++;
        $display("FAIL model queue holds %0d slots at %0t", done_q.size(), $time);
      end
      s = done_q.pop_front();
      check("out_chip", int'(out_recepteur_chip), int'(s.b));
      n_chip++;
      check("rythme_trame", int'(rythme_out_recepteur_trame), int'(s.slot == s.code));
      if (s.slot == s.code) begin
        check("out_trame", int'(out_recepteur_trame), int'(s.b));
        n_frame++;
      end else if (s.slot == 0 && s.code >= nce) n_out_of_frame++;
    end else begin
      check("rythme_trame idle", int'(rythme_out_recepteur_trame), int'(0));
    end
    if (dut.outm_0 == '1 || dut.outm_1 == '1) n_saturated++;
    // ---- model update ----
    if (!Renable) begin
      primed_m = 0; gcnt = 0; gidx = 0; done_q.delete();
    end else begin
      if (last_slot) begin
        slot_t s;
        s.b = slot_bit; s.slot = gidx; s.code = frame_code_m;
        done_q.push_back(s);
        primed_m = 1;
        gcnt = 0;
        gidx = last_frame ? 0 : gidx + 1;
      end else gcnt++;
    end
    // code memory
    if (unload) begin
      code_done_m = 0; code_wr_m = 0; code_ptr_m = 0; load_vals.delete();
    end else if (writing) begin
      if (code_wr_m == 0) code_len_m = load_vals.size();
      code_m[code_wr_m] = load_vals.pop_front();
      code_wr_m++;
      code_ptr_m = 0;
      if (code_wr_m == code_len_m) begin
        code_done_m = 1;
        n_code_load++;
      end
    end else if (code_done_m && last_frame) begin
      code_ptr_m = (code_ptr_m + 1 == code_len_m) ? 0 : code_ptr_m + 1;
    end
    // reconfiguration rule
    if (pend_m && (!Renable || last_frame)) begin
      if (Renable) n_reconf_run++; else n_reconf_idle++;
      if (tc_p != tc_m) n_rate_change++;
      if (nc_p != nc_m) n_nc_change++;
      if (tc_p < 2) n_tc_clamp++;
      tc_m = tc_p; nc_m = nc_p; pend_m = 0;
      check("applied strobe", int'(dut.reconf_applied), int'(1));
    end
    if (req) begin
      tc_p = new_tc; nc_p = new_nc; pend_m = 1;
    end
    check("Tc in force", int'(dut.tc_act), int'(tc_m));
    check("Nc in force", int'(dut.nc_act), int'(nc_m));
  endtask

  task automatic run_frames(int n);
    int f;
    f = 0;
    while (f < n) begin
      if (Renable && gcnt == ((tc_m < 2 ? 2 : tc_m) - 1) && gidx == ((nc_m < 1 ? 1 : nc_m) - 1)) f++;
      cycle();
    end
  endtask

  task automatic reconfigure(int new_tc, int new_nc);
    // Request at a random point of the frame.
    repeat ($urandom_range(0, 20)) cycle();
    cycle(1, new_tc, new_nc);
  endtask

  task automatic load(int len, int maxval);
    for (int i = 0; i < len; i++) load_vals.push_back($urandom_range(0, maxval));
  endtask

  initial begin
    RESET = 1'b1; Renable = 1'b0; load_code = 0; unload_code = 0; sig_reconf = 0;
    signal_recu = '0; lg_code = '0; code_j_data = '0; nb_Tc_par_trame_TH = '0; Tc = '0;
    repeat (3) @(posedge CLK); #1;
    RESET = 1'b0;
    Renable = 1'b1;
    // Power-up rate, no TH code: pulse of each frame expected in slot 0.
    run_frames(3);
    // Load a 5-value TH code while receiving.
    load(5, 7);
    run_frames(10);
    // Data-rate reconfiguration while receiving.
    reconfigure(4, 5);
    run_frames(12);
    // Replace the TH code; some values fall outside the 5-slot frame.
    cycle(0, 0, 0, 1);
    n_code_replace++;
    load(7, 9);
    run_frames(20);
    reconfigure(2, 1);
    run_frames(10);
    reconfigure(33, 3);
    big_pulses = 1;
    run_frames(3);
    big_pulses = 0;
    run_frames(2);
    // Stop the receiver, reconfigure while stopped, restart.
    Renable = 1'b0;
    repeat (5) cycle();
    cycle(1, 1, 0);       // clamped to Tc = 2, Nc = 1
    repeat (3) cycle();
    Renable = 1'b1;
    n_restart++;
    run_frames(10);
    reconfigure(16, 8);
    run_frames(8);
    // Every mechanism must have happened.
    begin
      int counts [12];
      string names [12];
      counts = '{n_chip, n_frame, n_code_load, n_code_replace, n_reconf_run,
                 n_reconf_idle, n_rate_change, n_nc_change, n_out_of_frame,
                 n_saturated, n_restart, n_tc_clamp};
      names = '{"chip-rate bits", "frame-rate bits", "TH code loads",
                "TH code replacements", "reconfigurations while receiving",
                "reconfigurations while stopped", "data-rate (Tc) changes",
                "slots-per-frame (Nc) changes", "frames with code outside frame",
                "saturated correlations", "restarts", "clamped Tc"};
      foreach (counts[i]) begin
        $display("%-34s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) begin
          failures++;
          $display("FAIL mechanism never exercised: %s", names[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
