// slot_timer: the slot and frame counter that every block of the receiver
// keeps for itself.
//
// cnt counts the cycles of the current time slot, 0 .. Tc-1, and idx the
// slots of the current frame, 0 .. Nc-1. slot_last is high in the last cycle
// of a slot and frame_last in the last cycle of a frame. While enable is low
// both counters are held at 0, so all blocks that share clock, reset, enable
// and the same Tc/Nc values count in step. Tc and Nc are read through
// uwb_pkg::eff_tc/eff_nc. They are meant to change only in the cycle that
// ends a frame (reconf_control sees to that); should a smaller value arrive
// mid-slot, the counters wrap at once instead of running past it.
//
// Timing: registered counters, combinational slot_last/frame_last.
module slot_timer
  import uwb_pkg::*;
(
  input  logic   clk,
  input  logic   reset,       // synchronous, active high
  input  logic   enable,
  input  param_t tc,          // slot length in cycles
  input  param_t nc,          // slots per frame
  output param_t cnt,         // cycle within slot
  output param_t idx,         // slot within frame
  output logic   slot_last,
  output logic   frame_last
);

  param_t tc_e, nc_e;

  always_comb begin
    tc_e       = eff_tc(tc);
    nc_e       = eff_nc(nc);
    slot_last  = enable && (cnt >= tc_e - param_t'(1));
    frame_last = slot_last && (idx >= nc_e - param_t'(1));
  end

  always_ff @(posedge clk) begin
    if (reset || !enable) begin
      cnt <= '0;
      idx <= '0;
    end else if (slot_last) begin
      cnt <= '0;
      idx <= frame_last ? '0 : idx + param_t'(1);
    end else begin
      cnt <= cnt + param_t'(1);
    end
  end

endmodule
