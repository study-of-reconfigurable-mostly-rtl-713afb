// th_discrimination: time-hopping slot selection ("discri") of the receiver.
//
// A TH-PPM frame holds Nc time slots; the transmitter puts the frame's pulse
// in the slot named by the time-hopping code value of that frame. This block
// keeps the slot/frame count of the receiver and, once per slot, takes the
// decided bit of the slot that has just ended:
//   * out_chip / rythme_chip: every slot's bit, at chip rate (1/Tc);
//   * out_trame / rythme_trame: the bit of the slot whose index equals the
//     frame's TH code, at frame rate (1/(Nc*Tc)).
// The four outputs, and Tc, Nc and the code as inputs, follow the receiver
// this design reproduces; how the slot is matched is this design's own.
//
// Timing: decision.out_decision for slot s is stable from the second cycle of
// slot s+1, so the bit is taken in cycle 1 of the next slot (cnt == 1; Tc is
// at least 2). The rythme_* outputs are one-cycle strobes in the cycle after
// that, when out_chip/out_trame hold the new bit (they keep it until the next
// strobe). The code input is sampled in the first cycle of every frame; the
// previous frame's code and the index of the slot just ended are kept as well,
// because the last slot of a frame is judged in the first slot of the next
// frame, possibly after Tc and Nc have been changed at that boundary. During
// the first slot after enable rises no slot has ended yet, so nothing is
// output then. A code value of Nc or more selects no slot, so that frame gives
// no frame-rate output.
module th_discrimination
  import uwb_pkg::*;
(
  input  logic   clk,
  input  logic   reset,        // synchronous, active high
  input  logic   enable,
  input  logic   th_in,        // decided bit from the decision block
  input  param_t code,         // TH code value of the current frame
  input  param_t nb_tc,        // Nc: slots per frame
  input  param_t duree_tc,     // Tc: slot length in cycles
  output logic   out_chip,     // bit of every slot
  output logic   out_trame,    // bit of the TH-selected slot of every frame
  output logic   rythme_chip,  // strobe: out_chip updated
  output logic   rythme_trame  // strobe: out_trame updated
);

  param_t cnt, idx;
  logic   slot_last, frame_last;
  param_t code_cur, code_prev;   // code of the current / previous frame
  param_t prev_idx;              // index of the slot that has just ended
  logic   primed;                // a full slot has been received
  logic   take;
  param_t dec_slot, dec_code;

  slot_timer u_timer (
    .clk, .reset, .enable,
    .tc(duree_tc), .nc(nb_tc),
    .cnt, .idx, .slot_last, .frame_last
  );

  always_comb begin
    take     = enable && primed && (cnt == param_t'(1));
    // The slot being judged is the one before the current slot; its index
    // is kept rather than derived, as Nc may have changed in between.
    dec_slot = prev_idx;
    dec_code = (idx == '0) ? code_prev : code_cur;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      code_cur     <= '0;
      code_prev    <= '0;
      prev_idx     <= '0;
      primed       <= 1'b0;
      out_chip     <= 1'b0;
      out_trame    <= 1'b0;
      rythme_chip  <= 1'b0;
      rythme_trame <= 1'b0;
    end else begin
      rythme_chip  <= 1'b0;
      rythme_trame <= 1'b0;
      if (!enable) begin
        primed <= 1'b0;
      end else begin
        if (slot_last) begin
          primed   <= 1'b1;
          prev_idx <= idx;
        end
        if (cnt == '0 && idx == '0) begin
          code_prev <= code_cur;
          code_cur  <= code;
        end
        if (take) begin
          out_chip    <= th_in;
          rythme_chip <= 1'b1;
          if (dec_slot == dec_code) begin
            out_trame    <= th_in;
            rythme_trame <= 1'b1;
          end
        end
      end
    end
  end

  // A frame-rate strobe always comes with a chip-rate strobe.
  a_trame_in_chip: assert property (@(posedge clk) disable iff (reset)
    rythme_trame |-> rythme_chip);

endmodule
