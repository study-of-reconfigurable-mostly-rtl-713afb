// decision: the PPM bit decision of the receiver.
//
// In the first cycle of every time slot the correlator has just published the
// two PPM energies of the previous slot; this block compares them then and
// registers the bit: 1 when position 1 holds more energy than position 0,
// else 0 (a tie gives 0). out_decision therefore changes once per slot, one
// cycle after the correlator's outputs, and stays stable for a whole slot.
//
// The block's place in the chain, its inputs (the two correlation values and
// Tc) and its single output follow the receiver this design reproduces. The
// mapping "pulse late = 1" and the tie rule are this design's choices.
module decision
  import uwb_pkg::*;
(
  input  logic   clk,
  input  logic   reset,      // synchronous, active high
  input  logic   enable,
  input  corr_t  in_0,       // energy of PPM position 0
  input  corr_t  in_1,       // energy of PPM position 1
  input  param_t duree_tc,   // Tc: slot length in cycles
  output logic   out_decision
);

  param_t cnt, idx;
  logic   slot_last, frame_last;

  slot_timer u_timer (
    .clk, .reset, .enable,
    .tc(duree_tc), .nc(param_t'(1)),
    .cnt, .idx, .slot_last, .frame_last
  );

  always_ff @(posedge clk) begin
    if (reset) out_decision <= 1'b0;
    else if (enable && cnt == '0) out_decision <= (in_1 > in_0);
  end

endmodule
