// bitfair_pe_array: the 16x16 output-stationary array of bit-serial PEs.
//
// PE(r,c) accumulates output channel oc0+r at output position (oh, ow0+c).
// Row r (one filter) receives one weight byte per cycle from weight bank r;
// its termination controller turns it into the weight bit and sign shared by
// the row, and column c receives one activation shared by the column. The
// control strobes (clear, mac_en, plane_end, last_plane, latch), omega(j),
// theta and the layer mode are broadcast to all PEs. all_done is high when
// every PE of the tile has terminated, which lets the controller skip the
// remaining bit planes of the tile.
//
// Follows the published arrangement (Fig. 4 of the paper: Filter r weight
// bank and TERMINATION CTRL per row, Input c per column, 16x16 PEs).
// Note: the paper's text says activations go to rows and weights to columns;
// its figure shows the reverse; this RTL follows the figure.
//
// Timing: the strobes and operands enter in the same cycle; per-PE state is
// registered inside the PEs; row_done/all_done are combinational from the
// registered terminate flags.
module bitfair_pe_array
  import bitfair_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS,
  parameter int unsigned COLS = PE_COLS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [ROWS-1:0]              row_active,
  input  logic [COLS-1:0]              col_active,
  input  logic                         clear,
  input  logic                         mac_en,
  input  logic                         plane_end,
  input  logic                         last_plane,
  input  logic                         latch,
  input  bitpos_t                      shamt,
  input  psum_t                        theta,
  input  logic                         relu_en,
  input  logic [3:0]                   out_shift,
  input  act_t        [COLS-1:0]       act,        // per-column activation
  input  logic        [ROWS-1:0][W_BITS-1:0] wgt_byte, // per-row weight byte
  input  psum_t       [ROWS-1:0]       bias,       // per-row O_prev (bias)
  input  logic                         mac_re,     // weight read request from the controller
  output logic        [ROWS-1:0]       wgt_re,     // per-row weight-bank read enable
  output logic        [ROWS-1:0]       row_done,
  output logic                         all_done,
  output logic        [ROWS-1:0][COLS-1:0] term,
  output logic        [ROWS-1:0][COLS-1:0][7:0] result,
  output logic                         sat_any
);

  logic [ROWS-1:0] wbit, wsign;
  logic [ROWS-1:0][COLS-1:0] sat;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    bitfair_term_ctrl #(.COLS(COLS)) u_tc (
      .row_active (row_active[r]),
      .col_active (col_active),
      .term       (term[r]),
      .mac_re     (mac_re),
      .wgt_byte   (wgt_byte[r]),
      .shamt      (shamt),
      .row_done   (row_done[r]),
      .wgt_re     (wgt_re[r]),
      .wbit       (wbit[r]),
      .wsign      (wsign[r])
    );
    for (genvar c = 0; c < COLS; c++) begin : g_col
      bitfair_pe u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .active     (row_active[r] && col_active[c]),
        .clear      (clear),
        .mac_en     (mac_en),
        .plane_end  (plane_end),
        .last_plane (last_plane),
        .act        (act[c]),
        .wbit       (wbit[r]),
        .wsign      (wsign[r]),
        .shamt      (shamt),
        .theta      (theta),
        .relu_en    (relu_en),
        .latch      (latch),
        .o_prev     (bias[r]),
        .out_shift  (out_shift),
        .term       (term[r][c]),
        .result     (result[r][c]),
        .sat_evt    (sat[r][c])
      );
    end
  end

  assign all_done = (row_done == '1);
  assign sat_any  = (sat != '0);

endmodule
