// bitfair_wgt_sram: the 32 KB weight memory, one 2 KB bank per filter row.
//
// Weights are 8-bit sign-magnitude bytes. Bank r holds every output channel
// oc with oc mod 16 = r. Per 16-channel group a layer stores, from w_base
// + g*(KH*KW*ICH + 2): the 16-bit bias (low byte, high byte), then the
// weights in (kh, kw, ic) order, which is the order the compute loop visits
// them, so the controller only has to increment one address. All banks see
// the same address; each has its own read enable so that a row whose PEs
// have all terminated does not read (rd_en[r] comes from the row's
// termination controller). A suppressed bank keeps its previous output.
//
// The published design gives the size (two 16 KB weight SRAMs) and one
// weight bank per filter row; the layout inside the banks is this
// implementation's own.
//
// Timing: wgt_q and host_rdata are valid the cycle after the request.
module bitfair_wgt_sram
  import bitfair_pkg::*;
#(
  parameter int unsigned NB    = BANKS,
  parameter int unsigned DEPTH = WGT_BANK_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(NB)
) (
  input  logic                 clk,
  input  logic [NB-1:0]        rd_en,
  input  logic [AW-1:0]        rd_word,
  output logic [NB-1:0][7:0]   wgt_q,
  input  logic                 host_en,
  input  logic                 host_we,
  input  logic [BW-1:0]        host_bank,
  input  logic [AW-1:0]        host_word,
  input  logic [7:0]           host_wdata,
  output logic [7:0]           host_rdata
);
  logic [BW-1:0] hbank_q;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          re, we;
    logic [AW-1:0] addr;
    always_comb begin
      if (host_en) begin
        re   = (host_bank == BW'(b)) && !host_we;
        we   = (host_bank == BW'(b)) && host_we;
        addr = host_word;
      end else begin
        re   = rd_en[b];
        we   = 1'b0;
        addr = rd_word;
      end
    end
    bitfair_sram_bank #(.DEPTH(DEPTH), .DW(8)) u_bank (
      .clk(clk), .re(re), .we(we), .addr(addr), .wdata(host_wdata), .rdata(wgt_q[b])
    );
  end

  always_ff @(posedge clk) if (host_en) hbank_q <= host_bank;
  assign host_rdata = wgt_q[hbank_q];
endmodule
