// bitfair_out_buf: the 8 KB global output memory.
//
// The local output registers of one PE row (16 outputs) are written here in
// one cycle, one byte per bank, next to the copy written into the activation
// SRAM for the next layer. The layout is that of the activation SRAM without
// a base: output (oc, oh, ow) sits in bank ow mod 16 at word
// (oc*OH + oh)*ceil(OW/16) + ow/16. The host reads single bytes.
//
// The published design names a global output memory of 8 KB that collects
// the PEs' local outputs; banking and layout are this implementation's own.
//
// Timing: host_rdata is valid the cycle after host_en.
module bitfair_out_buf
  import bitfair_pkg::*;
#(
  parameter int unsigned NB    = BANKS,
  parameter int unsigned DEPTH = OBUF_BANK_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(NB)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_word,
  input  logic [NB-1:0]        wr_mask,
  input  logic [NB-1:0][7:0]   wr_data,
  input  logic                 host_en,
  input  logic [BW-1:0]        host_bank,
  input  logic [AW-1:0]        host_word,
  output logic [7:0]           host_rdata
);
  logic [NB-1:0][7:0] bank_q;
  logic [BW-1:0]      hbank_q;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          re, we;
    logic [AW-1:0] addr;
    always_comb begin
      we   = wr_en && wr_mask[b];
      re   = !wr_en && host_en && (host_bank == BW'(b));
      addr = wr_en ? wr_word : host_word;
    end
    bitfair_sram_bank #(.DEPTH(DEPTH), .DW(8)) u_bank (
      .clk(clk), .re(re), .we(we), .addr(addr), .wdata(wr_data[b]), .rdata(bank_q[b])
    );
  end

  always_ff @(posedge clk) if (host_en) hbank_q <= host_bank;
  assign host_rdata = bank_q[hbank_q];
endmodule
