// correlation: the correlator ("Mult") of the TH-PPM receiver.
//
// Each time slot of Tc cycles is split in two PPM windows: cycles
// 0 .. Tc/2-1 are pulse position 0 and cycles Tc/2 .. Tc-1 are pulse
// position 1 (for odd Tc the second window is one cycle longer). Every cycle
// the received sample is multiplied by itself and the square is added to the
// accumulator of the window the cycle falls in. In the last cycle of the slot
// both sums (the last sample included) are copied to outm_0 / outm_1 and the
// accumulators restart. So outm_0/outm_1 always hold the energies of the two
// PPM positions of the previous slot, stable for a whole slot.
//
// The slot structure, the 32-bit sample and the two 32-bit outputs follow the
// receiver this design reproduces. The square-law (energy) template is this
// design's choice: the reference template waveform is not specified, and an
// energy detector works for any pulse shape and either polarity. The square
// is taken of the signed sample and every sum saturates at 2**32-1.
//
// Interface: sig is one signed sample per clock while enable is high. While
// enable is low the accumulators are cleared and the slot counter waits at 0.
// Latency: the energies of a slot appear one cycle after its last sample.
module correlation
  import uwb_pkg::*;
(
  input  logic   clk,
  input  logic   reset,      // synchronous, active high
  input  logic   enable,     // receiver enable (Renable)
  input  param_t duree_tc,   // Tc: slot length in cycles
  input  sample_t sig,       // received sample (signal_recu), signed
  output corr_t  outm_0,     // energy in PPM position 0 of the last slot
  output corr_t  outm_1      // energy in PPM position 1 of the last slot
);

  localparam logic [2*CORR_W-1:0] CORR_MAX = {{CORR_W{1'b0}}, {CORR_W{1'b1}}};

  param_t cnt, idx;
  logic   slot_last, frame_last;
  corr_t  acc_0, acc_1;
  corr_t  sum_0, sum_1;
  logic   in_pos1;
  logic signed [2*SAMPLE_W-1:0] prod;
  corr_t  sq;

  slot_timer u_timer (
    .clk, .reset, .enable,
    .tc(duree_tc), .nc(param_t'(1)),
    .cnt, .idx, .slot_last, .frame_last
  );

  // Saturating add of an energy term.
  function automatic corr_t sat_add(corr_t a, corr_t b);
    logic [CORR_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CORR_W] ? '1 : s[CORR_W-1:0];
  endfunction

  always_comb begin
    in_pos1 = cnt >= (eff_tc(duree_tc) >> 1);
    prod    = $signed(sig) * $signed(sig);
    sq      = (prod > $signed(CORR_MAX)) ? '1 : prod[CORR_W-1:0];
    sum_0   = in_pos1 ? acc_0 : sat_add(acc_0, sq);
    sum_1   = in_pos1 ? sat_add(acc_1, sq) : acc_1;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      acc_0  <= '0;
      acc_1  <= '0;
      outm_0 <= '0;
      outm_1 <= '0;
    end else if (!enable) begin
      acc_0  <= '0;
      acc_1  <= '0;
    end else if (slot_last) begin
      outm_0 <= sum_0;
      outm_1 <= sum_1;
      acc_0  <= '0;
      acc_1  <= '0;
    end else begin
      acc_0  <= sum_0;
      acc_1  <= sum_1;
    end
  end

endmodule
