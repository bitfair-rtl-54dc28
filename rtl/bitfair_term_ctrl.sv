// bitfair_term_ctrl: termination control for one filter row of the PE array.
//
// All PEs of a filter row share one weight-SRAM bank. This block gathers the
// terminate flags of the row: once every active PE of the row has terminated
// (or the row holds no valid output channel), row_done is raised and the
// row's weight-bank read is suppressed (wgt_re low), since no PE of the row
// would consume the weight. It also splits the weight byte coming out of the
// bank into the single magnitude bit at position omega(j) and the sign bit,
// which are broadcast along the row.
//
// Follows the published design: one termination controller per filter row
// next to its weight bank, and read suppression when all PEs sharing a weight
// access have terminated. The exact logic (AND over the flags, bit select) is
// the simplest that does this and is this implementation's own.
//
// Timing: purely combinational.
module bitfair_term_ctrl
  import bitfair_pkg::*;
#(
  parameter int unsigned COLS = PE_COLS
) (
  input  logic               row_active,  // this row maps to a valid output channel
  input  logic [COLS-1:0]    col_active,  // columns mapping to valid output positions
  input  logic [COLS-1:0]    term,        // terminate flags of the row's PEs
  input  logic               mac_re,      // controller wants a weight read for a MAC
  input  logic [W_BITS-1:0]  wgt_byte,    // sign-magnitude weight from the bank
  input  bitpos_t            shamt,       // omega(j) aligned with wgt_byte
  output logic               row_done,
  output logic               wgt_re,      // read enable to the row's weight bank
  output logic               wbit,
  output logic               wsign
);
  assign row_done = !row_active || ((term | ~col_active) == '1);
  assign wgt_re   = mac_re && !row_done;
  assign wbit     = wgt_byte[shamt];
  assign wsign    = wgt_byte[W_BITS-1];
endmodule
