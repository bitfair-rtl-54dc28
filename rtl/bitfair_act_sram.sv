// bitfair_act_sram: one 32 KB activation SRAM of 16 column-interleaved banks.
//
// Feature maps are stored row by row, channel-major: byte x of row y of
// channel ic sits in bank x mod 16 at word base + (ic*H + y)*ceil(W/16) +
// x/16. The 16 PE columns need the 16 consecutive pixels x = xoff .. xoff+15
// of one row (xoff = ow0 + kw), which always fall into 16 different banks, so
// a full column vector is read in one cycle without conflicts: each bank
// computes its own word address and the read data are rotated so that column
// c receives pixel xoff+c.
//
// A write-back port stores one output row of the array (16 bytes, one per
// bank, with a byte mask) in one cycle. A host port reads or writes a single
// byte. Priority is host, then write-back, then compute read; the controller
// keeps the host off while a layer runs.
//
// The published design gives the memory size (two 32 KB activation SRAMs)
// and shows 16 input/output banks feeding the 16 columns; the interleaving,
// the addressing and the rotation are this implementation's choices.
//
// Timing: col_data and host_rdata are valid the cycle after the request.
module bitfair_act_sram
  import bitfair_pkg::*;
#(
  parameter int unsigned NB    = BANKS,
  parameter int unsigned DEPTH = ACT_BANK_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(NB)
) (
  input  logic                 clk,
  // compute read port
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_row_base,   // word of pixel 0 of the row
  input  logic [8:0]           rd_xoff,       // first pixel x of the column vector
  output act_t [NB-1:0]        col_data,
  // write-back port (bank b takes wr_data[b])
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_word,
  input  logic [NB-1:0]        wr_mask,
  input  logic [NB-1:0][7:0]   wr_data,
  // host port
  input  logic                 host_en,
  input  logic                 host_we,
  input  logic [BW-1:0]        host_bank,
  input  logic [AW-1:0]        host_word,
  input  logic [7:0]           host_wdata,
  output logic [7:0]           host_rdata
);
  logic [NB-1:0][7:0]   bank_q;
  logic [BW-1:0]        rot_q, hbank_q;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          re, we;
    logic [AW-1:0] addr;
    logic [7:0]    wd;
    logic [BW-1:0] delta;
    logic [8:0]    xb;
    always_comb begin
      delta = BW'(b) - rd_xoff[BW-1:0];
      xb    = rd_xoff + 9'(delta);
      re = 1'b0; we = 1'b0; addr = '0; wd = '0;
      if (host_en) begin
        if (host_bank == BW'(b)) begin
          re = !host_we; we = host_we; addr = host_word; wd = host_wdata;
        end
      end else if (wr_en) begin
        we = wr_mask[b]; addr = wr_word; wd = wr_data[b];
      end else if (rd_en) begin
        re = 1'b1; addr = rd_row_base + AW'(xb >> BW);
      end
    end
    bitfair_sram_bank #(.DEPTH(DEPTH), .DW(8)) u_bank (
      .clk(clk), .re(re), .we(we), .addr(addr), .wdata(wd), .rdata(bank_q[b])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_en)   rot_q   <= rd_xoff[BW-1:0];
    if (host_en) hbank_q <= host_bank;
  end

  always_comb begin
    for (int c = 0; c < NB; c++) col_data[c] = bank_q[BW'(rot_q + BW'(c))];
    host_rdata = bank_q[hbank_q];
  end
endmodule
