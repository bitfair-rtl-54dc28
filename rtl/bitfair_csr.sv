// bitfair_csr: configuration and status registers of the accelerator.
//
// Holds a table of MAX_LAYERS layer descriptors (dimensions, kernel size,
// number of weight bit planes, bit order omega, threshold theta, ReLU mode,
// memory bases), the number of layers to run, a start bit and a status word,
// plus performance counters (busy cycles, MAC cycles, tiles, tiles ended
// early, stall cycles, suppressed weight-bank reads). The controller selects
// the descriptor of the layer it runs through layer_idx and reads it as a
// decoded layer_cfg_t.
//
// Descriptor words of slot l at word offset 0x40 + 8*l:
//   +0: ich[7:0] och[15:8] ih[23:16] iw[31:24]
//   +1: kh[3:0] kw[7:4] nbits[10:8] relu_en[12] src_sel[13] obuf_en[14] out_shift[19:16]
//   +2: theta[15:0] (two's complement)
//   +3: omega(j) in bits [3j+2:3j], j = 0..6
//   +4: in_base[10:0] out_base[26:16]
//   +5: w_base[10:0]
// Writing 1 to CTRL bit 0 starts a run and clears the counters.
//
// The published design loads bit order, threshold and layer dimensions from
// configuration registers at the start of each layer; the register map and the
// counters are this implementation's own.
//
// Timing: a request is always accepted; rsp_valid/rsp_rdata follow one cycle
// later. start is a one-cycle pulse.
module bitfair_csr
  import bitfair_pkg::*;
#(
  parameter int unsigned NLAYERS = MAX_LAYERS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  input  logic                 req_we,
  input  logic [9:0]           req_word,
  input  logic [31:0]          req_wdata,
  output logic                 rsp_valid,
  output logic [31:0]          rsp_rdata,
  // to/from the controller
  input  logic [2:0]           layer_idx,
  output layer_cfg_t           cfg,
  output logic [3:0]           n_layers,
  output logic                 start,
  input  logic                 busy,
  input  logic                 done,
  input  perf_evt_t            evt,
  input  logic [4:0]           wskip
);
  logic [31:0] tbl [NLAYERS][6];
  logic [3:0]  nl_q;
  logic        done_q;
  logic [31:0] c_cycles, c_macs, c_tiles, c_early, c_stalls, c_wskip;

  wire wr = req_valid && req_we;
  wire is_layer = (req_word >= CSR_LAYER0) && (req_word < CSR_LAYER0 + 10'(8*NLAYERS));
  wire [9:0] loff = req_word - CSR_LAYER0;
  wire [2:0] lslot = loff[5:3];
  wire [2:0] lword = loff[2:0];

  assign start    = wr && (req_word == CSR_CTRL) && req_wdata[0] && !busy;
  assign n_layers = nl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nl_q <= 4'd1;
      done_q <= 1'b0;
      for (int l = 0; l < NLAYERS; l++) for (int w = 0; w < 6; w++) tbl[l][w] <= '0;
    end else begin
      if (wr && req_word == CSR_NLAYERS) nl_q <= req_wdata[3:0];
      if (wr && is_layer && lword < 3'd6 && 32'(lslot) < NLAYERS) tbl[lslot][lword] <= req_wdata;
      if (start)     done_q <= 1'b0;
      else if (done) done_q <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {c_cycles, c_macs, c_tiles, c_early, c_stalls, c_wskip} <= '0;
    end else if (start) begin
      {c_cycles, c_macs, c_tiles, c_early, c_stalls, c_wskip} <= '0;
    end else begin
      if (busy)           c_cycles <= c_cycles + 1;
      if (evt.mac_cycle)  c_macs   <= c_macs + 1;
      if (evt.tile_done)  c_tiles  <= c_tiles + 1;
      if (evt.tile_early) c_early  <= c_early + 1;
      if (evt.stall)      c_stalls <= c_stalls + 1;
      c_wskip <= c_wskip + 32'(wskip);
    end
  end

  // Decoded descriptor of the running layer.
  logic [31:0] w0, w1, w2, w3, w4, w5;
  always_comb begin
    w0 = tbl[layer_idx][0]; w1 = tbl[layer_idx][1]; w2 = tbl[layer_idx][2];
    w3 = tbl[layer_idx][3]; w4 = tbl[layer_idx][4]; w5 = tbl[layer_idx][5];
    cfg.ich       = w0[7:0];
    cfg.och       = w0[15:8];
    cfg.ih        = w0[23:16];
    cfg.iw        = w0[31:24];
    cfg.kh        = w1[3:0];
    cfg.kw        = w1[7:4];
    cfg.nbits     = w1[10:8];
    cfg.relu_en   = w1[12];
    cfg.src_sel   = w1[13];
    cfg.obuf_en   = w1[14];
    cfg.out_shift = w1[19:16];
    cfg.theta     = w2[15:0];
    for (int j = 0; j < MAG_BITS; j++) cfg.order[j] = w3[3*j +: 3];
    cfg.in_base   = w4[ACT_AW-1:0];
    cfg.out_base  = w4[16 +: ACT_AW];
    cfg.w_base    = w5[WGT_AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= req_valid;
      rsp_rdata <= '0;
      if (req_valid && !req_we) begin
        if (is_layer) begin
          if (lword < 3'd6 && 32'(lslot) < NLAYERS) rsp_rdata <= tbl[lslot][lword];
        end else begin
          unique case (req_word)
            CSR_STATUS:  rsp_rdata <= {30'd0, done_q, busy};
            CSR_NLAYERS: rsp_rdata <= {28'd0, nl_q};
            CSR_CYCLES:  rsp_rdata <= c_cycles;
            CSR_MACS:    rsp_rdata <= c_macs;
            CSR_TILES:   rsp_rdata <= c_tiles;
            CSR_EARLY:   rsp_rdata <= c_early;
            CSR_STALLS:  rsp_rdata <= c_stalls;
            CSR_WSKIP:   rsp_rdata <= c_wskip;
            default:     rsp_rdata <= '0;
          endcase
        end
      end
    end
  end
endmodule
