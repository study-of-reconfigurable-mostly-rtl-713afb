// reconfigurable_receiver: data-rate and TH-code reconfigurable TH-PPM
// IR-UWB receiver (top level).
//
// The received, already digitised signal enters as one 32-bit signed sample
// per clock. The chain is:
//   correlation        -> energies of the two PPM positions of every slot
//   decision           -> one bit per slot (late pulse = 1)
//   th_discrimination  -> every slot's bit (chip rate) and the bit of the
//                         slot chosen by the TH code (frame rate)
//   th_code_management -> holds the TH code loaded by the MAC and gives the
//                         current frame's code value
//   reconf_control     -> Tc and Nc in force; a request on sig_reconf
//                         takes effect at the next frame boundary
// All blocks count slots and frames themselves from the same clock, reset,
// enable and Tc/Nc values, so their counters stay in step.
//
// The port list is that of the reconfigurable receiver this design
// reproduces (VHDL integers 0..255 become 8-bit vectors); the four blocks of
// the chain and their connections follow its block diagram. reconf_control
// is this design's way of honouring sig_reconf. Resets are synchronous and
// active high.
//
// Timing: the bit of slot s shows on out_recepteur_chip two cycles after
// slot s+1 began, with a one-cycle strobe on rythme_out_recepteur_chip; the
// frame-rate pair works the same way for the TH-selected slot.
module reconfigurable_receiver
  import uwb_pkg::*;
(
  input  logic    CLK,
  input  logic    RESET,
  input  logic    Renable,
  input  sample_t signal_recu,
  input  logic    load_code,
  input  param_t  lg_code,
  input  logic    unload_code,
  input  param_t  code_j_data,
  // reconfigurable parameters
  input  param_t  nb_Tc_par_trame_TH,
  input  param_t  Tc,
  // reconfiguration signal
  input  logic    sig_reconf,
  // outputs
  output logic    out_recepteur_trame,
  output logic    out_recepteur_chip,
  output logic    rythme_out_recepteur_chip,
  output logic    rythme_out_recepteur_trame
);

  param_t tc_act, nc_act;
  logic   reconf_pending, reconf_applied;
  corr_t  outm_0, outm_1;
  logic   out_decision;
  logic   complet;
  param_t code_out_j;

  reconf_control u_reconf (
    .clk(CLK), .reset(RESET), .enable(Renable),
    .sig_reconf, .tc_in(Tc), .nc_in(nb_Tc_par_trame_TH),
    .tc_act, .nc_act,
    .pending(reconf_pending), .applied(reconf_applied)
  );

  correlation u_corr (
    .clk(CLK), .reset(RESET), .enable(Renable),
    .duree_tc(tc_act), .sig(signal_recu),
    .outm_0, .outm_1
  );

  decision u_decision (
    .clk(CLK), .reset(RESET), .enable(Renable),
    .in_0(outm_0), .in_1(outm_1), .duree_tc(tc_act),
    .out_decision
  );

  th_code_management u_th_data (
    .clk(CLK), .reset(RESET), .enable(Renable),
    .load(load_code), .unload(unload_code),
    .longueur_code(lg_code), .code_j(code_j_data),
    .duree_tc(tc_act), .nb_tc(nc_act),
    .complet, .code_out_j
  );

  th_discrimination u_discri (
    .clk(CLK), .reset(RESET), .enable(Renable),
    .th_in(out_decision), .code(code_out_j),
    .nb_tc(nc_act), .duree_tc(tc_act),
    .out_chip(out_recepteur_chip), .out_trame(out_recepteur_trame),
    .rythme_chip(rythme_out_recepteur_chip),
    .rythme_trame(rythme_out_recepteur_trame)
  );

endmodule
