// th_code_management: time-hopping code memory ("th_data") of the receiver.
//
// The MAC side loads a TH code of lg_code values (1..255), one value per
// clock on code_j while load is high, into a 256-entry memory. When the last
// value is written, complet rises and the code is in use: code_out_j shows
// the value for the current frame and steps to the next value at the end of
// every frame (Nc slots of Tc cycles, counted like the rest of the receiver),
// wrapping after lg_code frames. unload clears the stored code (complet
// falls) so that a new one can be loaded; that is how the TH code is
// reconfigured. While no complete code is held, code_out_j is 0: the pulse is
// expected in slot 0 of every frame.
//
// The ports (load, unload, code length, code value, Tc, Nc in; complet and
// the current code out) follow the receiver this design reproduces. The
// one-value-per-clock load protocol, the meaning given to unload and the
// zero code while empty are this design's choices.
//
// Timing: loading works whether or not enable is high; values offered after
// the code is complete are ignored until unload. lg_code is taken when the
// first value is written. code_out_j is read combinationally from the memory
// and changes in the cycle after a frame's last cycle. The code pointer
// restarts at value 0 whenever a new code completes.
module th_code_management
  import uwb_pkg::*;
#(
  parameter int CODE_DEPTH = 256   // code memory entries; lg_code is 8 bits
) (
  input  logic   clk,
  input  logic   reset,          // synchronous, active high
  input  logic   enable,
  input  logic   load,           // load_code: write code_j this cycle
  input  logic   unload,         // unload_code: discard the stored code
  input  param_t longueur_code,  // lg_code: number of code values
  input  param_t code_j,         // code_j_data: code value to write
  input  param_t duree_tc,       // Tc
  input  param_t nb_tc,          // Nc
  output logic   complet,        // a complete code is held and in use
  output param_t code_out_j      // code value of the current frame
);

  localparam int AW = $clog2(CODE_DEPTH);

  param_t mem [CODE_DEPTH];
  param_t wr_cnt;      // values written so far
  param_t len_q;       // code length taken at the first write
  param_t rd_ptr;      // value used in the current frame
  param_t cnt, idx;
  logic   slot_last, frame_last;
  param_t len_now;

  slot_timer u_timer (
    .clk, .reset, .enable,
    .tc(duree_tc), .nc(nb_tc),
    .cnt, .idx, .slot_last, .frame_last
  );

  always_comb begin
    len_now    = (wr_cnt == '0) ? longueur_code : len_q;
    code_out_j = complet ? mem[AW'(rd_ptr)] : '0;
  end

  always_ff @(posedge clk) begin
    if (load && !unload && !complet && len_now != '0)
      mem[AW'(wr_cnt)] <= code_j;
  end

  always_ff @(posedge clk) begin
    if (reset || unload) begin
      wr_cnt  <= '0;
      len_q   <= '0;
      complet <= 1'b0;
      rd_ptr  <= '0;
    end else if (load && !complet && len_now != '0) begin
      len_q  <= len_now;
      wr_cnt <= wr_cnt + param_t'(1);
      rd_ptr <= '0;
      if (wr_cnt + param_t'(1) == len_now) complet <= 1'b1;
    end else if (complet && frame_last) begin
      rd_ptr <= (rd_ptr + param_t'(1) >= len_q) ? '0 : rd_ptr + param_t'(1);
    end
  end

  a_ptr_in_range: assert property (@(posedge clk) disable iff (reset)
    complet |-> rd_ptr < len_q);

endmodule
