// bitfair_top: BitFair bit-serial CNN accelerator with early termination.
//
// A 16x16 array of bit-serial PEs computes a stride-1 convolution layer
// (fully connected layers are a 1x1 output), output-stationary: PE(r,c) owns
// output (oc0+r, oh, ow0+c). Weights are processed one magnitude bit plane at
// a time in a per-layer programmable order omega; after each plane every PE
// compares its bias-free partial sum with the layer threshold theta and, if
// it is at or below, stops and will output zero (ReLU would clamp it). When
// all PEs of a tile have stopped, the controller skips the tile's remaining
// planes; when all PEs of a filter row have stopped, that row's weight reads
// are suppressed.
//
// Memories: two 32 KB activation SRAMs (a layer reads one, writes the other),
// 32 KB of weight SRAM in 16 per-filter banks, an 8 KB output buffer: 104 KB.
// The host reaches the configuration registers and all memories through an
// AXI4-Lite slave; the memories only while no run is active (otherwise the
// request waits).
//
// Host address map (byte addresses, one byte or register per 32-bit word):
//   0x00000-0x3FFFF  CSR (see bitfair_csr)
//   0x40000-0x7FFFF  activation SRAMs: byte index i = addr[17:2];
//                    i[15] selects SRAM A/B, i[14:4] the word, i[3:0] the bank
//   0x80000-0xBFFFF  weight SRAM: i[14:4] word, i[3:0] bank (= output channel mod 16)
//   0xC0000-0xFFFFF  output buffer (read only): i[12:4] word, i[3:0] bank
// irq is high while the STATUS done bit is set.
//
// Follows the published architecture (AXI, activation/weight SRAMs, 16x16 PE
// array, termination controllers, FSM controller, output memory). The address
// map, memory layouts, tile order and write-back overlap are this
// implementation's own choices.
module bitfair_top
  import bitfair_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [31:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        irq
);
  // ---------------- host bus ----------------
  logic               req_valid, req_ready, req_we, rsp_valid;
  logic [HADDR_W-1:0] req_addr;
  logic [31:0]        req_wdata, rsp_rdata;

  bitfair_axi_lite u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata
  );

  region_e     region, region_q;
  logic [15:0] hidx;
  logic        hidx_sel_q;
  logic        busy, done, start;
  logic        acc;          // request accepted this cycle
  assign region    = region_e'(req_addr[19:18]);
  assign hidx      = req_addr[17:2];
  assign req_ready = (region == REG_CSR) || !busy;
  assign acc       = req_valid && req_ready;

  // ---------------- CSR ----------------
  layer_cfg_t cfg_tbl, cfg;
  logic [3:0] n_layers;
  logic [2:0] layer_idx;
  perf_evt_t  evt;
  logic       csr_rsp_valid;
  logic [31:0] csr_rdata;
  logic [4:0] wskip;

  bitfair_csr u_csr (
    .clk, .rst_n,
    .req_valid (acc && region == REG_CSR),
    .req_we, .req_word (req_addr[11:2]), .req_wdata,
    .rsp_valid (csr_rsp_valid), .rsp_rdata (csr_rdata),
    .layer_idx, .cfg (cfg_tbl), .n_layers, .start, .busy, .done, .evt, .wskip
  );

  // ---------------- controller ----------------
  logic [PE_ROWS-1:0] row_active, row_done, wgt_re_arr;
  logic [PE_COLS-1:0] col_active, wb_mask;
  logic clear, latch, d_mac, d_plane_end, d_last_plane, d_bias_lo, d_bias_hi;
  bitpos_t d_shamt;
  logic act_rd_en, mac_re, bias_re, wb_en, wb_obuf_en, wb_dst_sel, all_done;
  logic [ACT_AW-1:0]  act_row_base, wb_act_word;
  logic [8:0]         act_xoff;
  logic [WGT_AW-1:0]  wgt_word;
  logic [3:0]         wb_row;
  logic [OBUF_AW-1:0] wb_obuf_word;

  bitfair_ctrl u_ctrl (
    .clk, .rst_n, .start, .n_layers, .cfg_in (cfg_tbl), .layer_idx, .busy, .done, .cfg,
    .all_done, .row_active, .col_active, .clear, .latch, .d_mac, .d_plane_end,
    .d_last_plane, .d_shamt, .d_bias_lo, .d_bias_hi, .act_rd_en, .act_row_base, .act_xoff,
    .mac_re, .bias_re, .wgt_word, .wb_en, .wb_row, .wb_act_word, .wb_obuf_word, .wb_mask,
    .wb_obuf_en, .wb_dst_sel, .evt
  );

  // ---------------- PE array ----------------
  act_t  [PE_COLS-1:0]          col_a, col_b, col_act;
  logic  [PE_ROWS-1:0][7:0]     wgt_q;
  psum_t [PE_ROWS-1:0]          bias;
  logic  [PE_ROWS-1:0][PE_COLS-1:0]      term;
  logic  [PE_ROWS-1:0][PE_COLS-1:0][7:0] result;
  logic  sat_any;

  assign col_act = cfg.src_sel ? col_b : col_a;

  bitfair_pe_array u_array (
    .clk, .rst_n, .row_active, .col_active, .clear, .mac_en (d_mac),
    .plane_end (d_plane_end), .last_plane (d_last_plane), .latch, .shamt (d_shamt),
    .theta (cfg.theta), .relu_en (cfg.relu_en), .out_shift (cfg.out_shift),
    .act (col_act), .wgt_byte (wgt_q), .bias, .mac_re, .wgt_re (wgt_re_arr),
    .row_done, .all_done, .term, .result, .sat_any
  );

  // per-row bias (O_prev) registers, loaded in the tile prologue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bias <= '0;
    else for (int r = 0; r < PE_ROWS; r++) begin
      if (d_bias_lo) bias[r][7:0]  <= wgt_q[r];
      if (d_bias_hi) bias[r][15:8] <= wgt_q[r];
    end
  end

  always_comb begin
    wskip = '0;
    for (int r = 0; r < PE_ROWS; r++) wskip += 5'(mac_re && row_active[r] && row_done[r]);
  end

  // ---------------- memories ----------------
  wire host_act  = acc && region == REG_ACT;
  wire host_wgt  = acc && region == REG_WGT;
  wire host_obuf = acc && region == REG_OBUF;
  logic [7:0] act_a_rd, act_b_rd, wgt_rd, obuf_rd;
  logic [PE_COLS-1:0][7:0] wb_data;
  assign wb_data = result[wb_row];

  bitfair_act_sram u_act_a (
    .clk, .rd_en (act_rd_en && !cfg.src_sel), .rd_row_base (act_row_base), .rd_xoff (act_xoff),
    .col_data (col_a),
    .wr_en (wb_en && !wb_dst_sel), .wr_word (wb_act_word), .wr_mask (wb_mask), .wr_data (wb_data),
    .host_en (host_act && !hidx[15]), .host_we (req_we), .host_bank (hidx[3:0]),
    .host_word (hidx[14:4]), .host_wdata (req_wdata[7:0]), .host_rdata (act_a_rd)
  );
  bitfair_act_sram u_act_b (
    .clk, .rd_en (act_rd_en && cfg.src_sel), .rd_row_base (act_row_base), .rd_xoff (act_xoff),
    .col_data (col_b),
    .wr_en (wb_en && wb_dst_sel), .wr_word (wb_act_word), .wr_mask (wb_mask), .wr_data (wb_data),
    .host_en (host_act && hidx[15]), .host_we (req_we), .host_bank (hidx[3:0]),
    .host_word (hidx[14:4]), .host_wdata (req_wdata[7:0]), .host_rdata (act_b_rd)
  );
  bitfair_wgt_sram u_wgt (
    .clk, .rd_en (bias_re ? '1 : wgt_re_arr), .rd_word (wgt_word), .wgt_q,
    .host_en (host_wgt), .host_we (req_we), .host_bank (hidx[3:0]), .host_word (hidx[14:4]),
    .host_wdata (req_wdata[7:0]), .host_rdata (wgt_rd)
  );
  bitfair_out_buf u_obuf (
    .clk, .wr_en (wb_en && wb_obuf_en), .wr_word (wb_obuf_word), .wr_mask (wb_mask),
    .wr_data (wb_data), .host_en (host_obuf && !req_we), .host_bank (hidx[3:0]),
    .host_word (hidx[12:4]), .host_rdata (obuf_rd)
  );

  // ---------------- host response ----------------
  logic acc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= 1'b0; region_q <= REG_CSR; hidx_sel_q <= 1'b0;
    end else begin
      acc_q <= acc;
      if (acc) begin region_q <= region; hidx_sel_q <= hidx[15]; end
    end
  end
  assign rsp_valid = acc_q;
  always_comb begin
    unique case (region_q)
      REG_CSR:  rsp_rdata = csr_rdata;
      REG_ACT:  rsp_rdata = {24'd0, hidx_sel_q ? act_b_rd : act_a_rd};
      REG_WGT:  rsp_rdata = {24'd0, wgt_rd};
      default:  rsp_rdata = {24'd0, obuf_rd};
    endcase
  end

  // irq mirrors the STATUS done bit
  logic done_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     done_q <= 1'b0;
    else if (start) done_q <= 1'b0;
    else if (done)  done_q <= 1'b1;
  end
  assign irq = done_q;

  logic unused;
  assign unused = ^{csr_rsp_valid, term, sat_any, evt.layer_done};
endmodule
