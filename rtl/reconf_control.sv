// reconf_control: applies the reconfigurable data-rate parameters.
//
// The MAC side presents a new slot length Tc and a new number of slots per
// frame Nc on its inputs and asserts sig_reconf for one or more cycles; the
// values present in the last cycle sig_reconf is high are kept as pending.
// The pending values become active (tc_act, nc_act) at the end of the current
// frame, so the whole receiver switches from one frame grid to the next
// without a broken slot and all blocks' counters stay in step. While the
// receiver is disabled there is no frame to finish and the pending values
// become active in the next cycle. applied is a one-cycle strobe in the cycle
// the new values first show on tc_act/nc_act.
//
// That parameters are inputs and take effect on a reconfiguration signal
// while the receiver keeps running follows the source; switching only at a
// frame boundary, and the power-up values DEFAULT_TC and DEFAULT_NC (the
// source gives none), are this design's choices. The data rate that follows
// is one decided bit per slot, 1/Tc bits per clock cycle.
module reconf_control
  import uwb_pkg::*;
#(
  parameter param_t DEFAULT_TC = 8'd16,
  parameter param_t DEFAULT_NC = 8'd8
) (
  input  logic   clk,
  input  logic   reset,       // synchronous, active high
  input  logic   enable,
  input  logic   sig_reconf,  // reconfiguration request
  input  param_t tc_in,       // requested Tc
  input  param_t nc_in,       // requested Nc
  output param_t tc_act,      // Tc in force
  output param_t nc_act,      // Nc in force
  output logic   pending,     // a request waits for the frame boundary
  output logic   applied      // strobe: new values in force from this cycle
);

  param_t tc_pend, nc_pend;
  param_t cnt, idx;
  logic   slot_last, frame_last;

  slot_timer u_timer (
    .clk, .reset, .enable,
    .tc(tc_act), .nc(nc_act),
    .cnt, .idx, .slot_last, .frame_last
  );

  always_ff @(posedge clk) begin
    if (reset) begin
      tc_act  <= DEFAULT_TC;
      nc_act  <= DEFAULT_NC;
      tc_pend <= DEFAULT_TC;
      nc_pend <= DEFAULT_NC;
      pending <= 1'b0;
      applied <= 1'b0;
    end else begin
      applied <= 1'b0;
      if (pending && (!enable || frame_last)) begin
        tc_act  <= tc_pend;
        nc_act  <= nc_pend;
        pending <= 1'b0;
        applied <= 1'b1;
      end
      if (sig_reconf) begin
        tc_pend <= tc_in;
        nc_pend <= nc_in;
        pending <= 1'b1;
      end
    end
  end

  // New values only ever take effect at a frame boundary or while stopped.
  a_apply_at_boundary: assert property (@(posedge clk) disable iff (reset)
    applied |-> $past(!enable || frame_last));

endmodule
