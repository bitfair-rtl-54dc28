// bitfair_sram_bank: single-port, byte-wide SRAM bank with registered read.
//
// Stands in for one foundry SRAM macro bank. One access per cycle: a write
// (we) stores wdata at addr; a read (re) returns mem[addr] on rdata at the
// next clock edge; rdata holds its value when re is low, which is what lets
// a suppressed read keep the previous operand. Contents are not reset.
// The macro's exact organisation is not published; the depth is chosen so
// that the banks add up to the published memory sizes.
module bitfair_sram_bank #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned DW    = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end
endmodule
