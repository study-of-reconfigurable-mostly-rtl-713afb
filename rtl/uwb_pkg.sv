// uwb_pkg: widths, types and helper functions shared by the blocks of the
// reconfigurable TH-PPM IR-UWB receiver.
//
// The receiver works on a slot grid: a time slot ("chip") lasts Tc clock
// cycles and a frame holds Nc time slots. Both numbers are 8-bit run-time
// parameters (0..255), as in the receiver entity the design is based on. The
// received sample is 32 bits wide, also as in that entity.
//
// A slot of fewer than 2 cycles cannot hold the two pulse positions of PPM,
// and a frame needs at least one slot, so every block reads Tc and Nc through
// eff_tc() and eff_nc(), which raise 0 and 1 to the smallest usable values.
// That clamping is this design's own choice; the source does not say what
// such values mean.
package uwb_pkg;

  localparam int PARAM_W  = 8;   // width of Tc, Nc, code values and code length
  localparam int SAMPLE_W = 32;  // width of the received sample signal_recu
  localparam int CORR_W   = 32;  // width of the two correlation outputs

  typedef logic [PARAM_W-1:0]  param_t;
  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef logic [CORR_W-1:0]   corr_t;

  // Slot length actually used: at least 2 cycles.
  function automatic param_t eff_tc(param_t tc);
    return (tc < param_t'(2)) ? param_t'(2) : tc;
  endfunction

  // Slots per frame actually used: at least 1.
  function automatic param_t eff_nc(param_t nc);
    return (nc == '0) ? param_t'(1) : nc;
  endfunction

endpackage
