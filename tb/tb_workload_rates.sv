// tb_workload_rates: data-rate and TH-code workloads of the reconfigurable
// receiver, from the fastest to the slowest configuration the 8-bit entries
// allow.
//
// For each configuration (Tc, Nc, TH code length) the receiver is reset, set
// up while stopped (sig_reconf, then a code of random values below Nc loaded
// through load_code), and started. The testbench transmits one PPM pulse per
// slot with random bits plus noise and checks:
//   * every chip-rate bit, and that the k-th chip strobe comes exactly
//     (k+1)*Tc + 2 cycles after the start: one bit per Tc cycles, D = 1/Tc;
//   * every frame-rate bit, which must be the bit sent in slot c_j of frame j,
//     at the cycle that follows from the same rule;
//   * the total number of strobes of each kind.
// The configurations include Tc = 2 (highest rate), Tc = 255 (lowest),
// Nc = 1 and Nc = 255, and a 255-value code.
module tb_workload_rates;
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
    repeat (2000000) @(posedge CLK);
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

  task automatic run_config(int tc, int nc, int len, int nframes);
    int  code [256];
    bit  bits [$];
    int  n, chip_k, frame_k, nslots, exp_frames;
    int  half, s, cnt, pos, sample, f, sl;
    bit  b;
    // Reset and set up while stopped.
    RESET = 1'b1; Renable = 1'b0; load_code = 0; unload_code = 0; sig_reconf = 0;
    @(posedge CLK); #1;
    RESET = 1'b0;
    Tc = param_t'(tc); nb_Tc_par_trame_TH = param_t'(nc); sig_reconf = 1'b1;
    @(posedge CLK); #1;
    sig_reconf = 1'b0;
    lg_code = param_t'(len);
    for (int i = 0; i < len; i++) begin
      code[i] = $urandom_range(0, nc - 1);
      load_code = 1'b1; code_j_data = param_t'(code[i]);
      @(posedge CLK); #1;
    end
    load_code = 1'b0;
    check("Tc in force", int'(dut.tc_act), int'(tc));
    check("code complete", int'(dut.complet), int'(1));
    // Receive nframes frames.
    half = tc / 2;
    nslots = nframes * nc;
    chip_k = 0; frame_k = 0;
    Renable = 1'b1;
    for (n = 0; n < nslots * tc + 3; n++) begin
      s   = n / tc;
      cnt = n % tc;
      if (cnt == 0) bits.push_back(1'($urandom));
      b   = bits[s];
      pos = b ? half : 0;
      sample = $urandom_range(0, 100) - 50;
      if (s >= nslots) sample = 0;
      else if (cnt == pos) sample = 3000;
      else if (cnt == pos + 1 && cnt < (b ? tc : half)) sample = -1500;
      signal_recu = sample_t'(sample);
      @(posedge CLK); #1;
      // Now in cycle n+1 after the start.
      if (rythme_out_recepteur_chip) begin
        check("chip strobe cycle", int'(n + 1), int'((chip_k + 1) * tc + 2));
        check("chip bit", int'(out_recepteur_chip), int'(bits[chip_k]));
        chip_k++;
      end
      if (rythme_out_recepteur_trame) begin
        f  = frame_k;
        sl = f * nc + code[f % len];
        check("frame strobe cycle", int'(n + 1), int'((sl + 1) * tc + 2));
        check("frame bit", int'(out_recepteur_trame), int'(bits[sl]));
        frame_k++;
      end
    end
    Renable = 1'b0;
    @(posedge CLK); #1;
    // Every slot sent gives a chip bit; every frame a frame bit.
    check("chip bits", int'(chip_k), int'(nslots));
    exp_frames = nframes;
    check("frame bits", int'(frame_k), int'(exp_frames));
    $display("Tc=%0d Nc=%0d code length %0d: %0d chip bits (1 per %0d cycles), %0d frame bits",
             tc, nc, len, chip_k, tc, frame_k);
  endtask

  initial begin
    signal_recu = '0; lg_code = '0; code_j_data = '0; nb_Tc_par_trame_TH = '0; Tc = '0;
    run_config(2, 1, 1, 300);      // highest rate, no hopping
    run_config(2, 8, 255, 300);    // highest rate, longest code, code wraps
    run_config(16, 8, 5, 40);      // power-up rate
    run_config(3, 255, 17, 4);     // odd slot, largest frame
    run_config(255, 4, 3, 6);      // lowest rate
    run_config(255, 255, 2, 2);    // slowest frame: 65025 cycles
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
