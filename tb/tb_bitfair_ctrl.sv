// tb_bitfair_ctrl: runs the controller alone over a two-layer job and checks
// every request it issues against the compute flow written out as plain
// nested loops (oh, oc0, ow0, bit slot j, kh, kw, ic): activation row base and
// x offset, weight address (bias bytes first, then weights in kh/kw/ic order),
// omega(j) and the plane_end/last_plane tags delivered one cycle later, and
// every write-back row address and column mask. The testbench stands in for
// the PE array: on some tiles it raises all_done after the first bit plane,
// as an array whose PEs all terminated would, and expects the controller to
// skip the rest of that tile. Layer 2 is tiny, so the controller must stall
// on the write-back. Also checks the tile, early-exit and stall counts and
// the run's cycle count.
module tb_bitfair_ctrl;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, busy, done, all_done, clear, latch, d_mac, d_plane_end, d_last_plane, d_bias_lo, d_bias_hi;
  logic act_rd_en, mac_re, bias_re, wb_en, wb_obuf_en, wb_dst_sel;
  logic [3:0] n_layers, wb_row; logic [2:0] layer_idx;
  layer_cfg_t cfg_in, cfg, cfgs [2];
  logic [15:0] row_active, col_active, wb_mask;
  bitpos_t d_shamt;
  logic [10:0] act_row_base, wgt_word, wb_act_word; logic [8:0] act_xoff, wb_obuf_word;
  perf_evt_t evt;
  int checks = 0, failures = 0;
  bitfair_ctrl dut (.*);

  assign cfg_in = cfgs[layer_idx];

  typedef struct { int row_base, xoff, wword, shamt, pe, lp; } mac_t;
  typedef struct { int word, mask; } wb_t;
  mac_t exp_mac[$], got_mac[$];
  int   exp_wgt[$], got_wgt[$];
  wb_t  exp_wb[$], got_wb[$];
  int   tiles = 0, early_tiles = 0, n_early_evt = 0, n_stall = 0, n_tile_evt = 0, cycles = 0;

  // ---- stand-in for the array: all PEs terminate after plane 0 on every third tile ----
  int tile_no = -1;
  always_ff @(posedge clk) begin
    if (clear) begin all_done <= 1'b0; tile_no <= tile_no + 1; end
    else if (d_mac && d_plane_end && !d_last_plane && (tile_no % 3 == 1) && layer_idx == 0) all_done <= 1'b1;
  end

  // ---- monitor ----
  mac_t pend; bit pend_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (bias_re) got_wgt.push_back(int'(wgt_word));
    if (pend_v) begin
      if (!d_mac) begin failures++; $display("d_mac missing"); end
      pend.shamt = int'(d_shamt); pend.pe = int'(d_plane_end); pend.lp = int'(d_last_plane);
      got_mac.push_back(pend);
    end
    pend_v = 0;
    if (mac_re) begin
      pend.row_base = int'(act_row_base); pend.xoff = int'(act_xoff); pend.wword = int'(wgt_word);
      pend_v = 1;
      if (!act_rd_en) begin failures++; $display("act_rd_en missing"); end
    end
    if (wb_en) begin wb_t w; w.word = int'(wb_act_word); w.mask = int'(wb_mask); got_wb.push_back(w); end
    if (evt.tile_early) n_early_evt++;
    if (evt.stall) n_stall++;
    if (evt.tile_done) n_tile_evt++;
  end

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic build_expect(input int l);
    layer_cfg_t c = cfgs[l];
    int OH = c.ih - c.kh + 1, OW = c.iw - c.kw + 1, IWB = (c.iw + 15) / 16, OWB = (OW + 15) / 16;
    int KK = c.kh * c.kw * c.ich;
    for (int oh = 0; oh < OH; oh++)
      for (int oc0 = 0; oc0 < c.och; oc0 += 16)
        for (int ow0 = 0; ow0 < OW; ow0 += 16) begin
          int gb = c.w_base + (oc0 / 16) * (KK + 2);
          int planes = c.nbits;
          bit early = (l == 0) && (tiles % 3 == 1) && (c.nbits > 1);
          exp_wgt.push_back(gb); exp_wgt.push_back(gb + 1);
          for (int j = 0; j < planes; j++)
            for (int kh = 0; kh < c.kh; kh++) for (int kw = 0; kw < c.kw; kw++)
              for (int ic = 0; ic < c.ich; ic++) begin
                mac_t m;
                if (early && (j > 1 || (j == 1 && (kh + kw + ic) != 0))) continue;
                m.row_base = c.in_base + (ic * c.ih + oh + kh) * IWB;
                m.xoff = ow0 + kw;
                m.wword = gb + 2 + (kh * c.kw + kw) * c.ich + ic;
                m.shamt = c.order[j];
                m.pe = (kh == c.kh - 1 && kw == c.kw - 1 && ic == c.ich - 1);
                m.lp = (j == planes - 1);
                exp_mac.push_back(m);
              end
          if (early) early_tiles++;
          for (int r = 0; r < 16; r++) if (oc0 + r < c.och) begin
            wb_t w; int mask = 0;
            for (int cc = 0; cc < 16; cc++) if (ow0 + cc < OW) mask |= (1 << cc);
            w.word = c.out_base + ((oc0 + r) * OH + oh) * OWB + ow0 / 16;
            w.mask = mask;
            exp_wb.push_back(w);
          end
          tiles++;
        end
  endtask

  initial begin
    start = 0; n_layers = 2;
    cfgs[0] = '0; cfgs[1] = '0;
    cfgs[0].ich = 3; cfgs[0].och = 20; cfgs[0].ih = 6; cfgs[0].iw = 20; cfgs[0].kh = 3; cfgs[0].kw = 2;
    cfgs[0].nbits = 3; cfgs[0].relu_en = 1; cfgs[0].in_base = 5; cfgs[0].out_base = 100; cfgs[0].w_base = 7;
    cfgs[0].order = {3'd0, 3'd1, 3'd3, 3'd4, 3'd2, 3'd6, 3'd5};
    cfgs[1].ich = 1; cfgs[1].och = 4; cfgs[1].ih = 1; cfgs[1].iw = 40; cfgs[1].kh = 1; cfgs[1].kw = 1;
    cfgs[1].nbits = 2; cfgs[1].relu_en = 1; cfgs[1].src_sel = 1; cfgs[1].in_base = 100; cfgs[1].out_base = 0;
    cfgs[1].w_base = 300; cfgs[1].order = {3'd0, 3'd1, 3'd2, 3'd3, 3'd4, 3'd5, 3'd6};
    build_expect(0); build_expect(1);
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy after done"); end
    checks++;
    if (got_mac.size() != exp_mac.size()) begin
      failures++; $display("MAC count %0d expected %0d", got_mac.size(), exp_mac.size());
    end
    for (int i = 0; i < exp_mac.size() && i < got_mac.size(); i++) begin
      checks++;
      if (got_mac[i] != exp_mac[i]) begin
        failures++;
        if (failures < 10) $display("MAC %0d: got rb%0d x%0d w%0d s%0d pe%0d lp%0d exp rb%0d x%0d w%0d s%0d pe%0d lp%0d", i,
          got_mac[i].row_base, got_mac[i].xoff, got_mac[i].wword, got_mac[i].shamt, got_mac[i].pe, got_mac[i].lp,
          exp_mac[i].row_base, exp_mac[i].xoff, exp_mac[i].wword, exp_mac[i].shamt, exp_mac[i].pe, exp_mac[i].lp);
      end
    end
    // bias reads: two per tile, in order
    checks++; if (got_wgt.size() != exp_wgt.size()) begin failures++; $display("bias reads %0d vs %0d", got_wgt.size(), exp_wgt.size()); end
    for (int i = 0; i < exp_wgt.size() && i < got_wgt.size(); i++) begin
      checks++; if (got_wgt[i] != exp_wgt[i]) begin failures++; $display("bias read %0d: %0d vs %0d", i, got_wgt[i], exp_wgt[i]); end
    end
    checks++; if (got_wb.size() != exp_wb.size()) begin failures++; $display("wb rows %0d vs %0d", got_wb.size(), exp_wb.size()); end
    for (int i = 0; i < exp_wb.size() && i < got_wb.size(); i++) begin
      checks++;
      if (got_wb[i] != exp_wb[i]) begin failures++; $display("wb %0d: %0d/%h vs %0d/%h", i, got_wb[i].word, got_wb[i].mask, exp_wb[i].word, exp_wb[i].mask); end
    end
    checks += 3;
    if (n_tile_evt != tiles) begin failures++; $display("tiles %0d vs %0d", n_tile_evt, tiles); end
    if (n_early_evt != early_tiles) begin failures++; $display("early %0d vs %0d", n_early_evt, early_tiles); end
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    // cycle budget: per tile 2 prologue + MACs (+1 exit cycle if early) + drain, latch, next;
    // per layer load + prep + 16-cycle write-back drain; plus stall cycles
    checks++;
    if (cycles != exp_mac.size() + 5 * tiles + early_tiles + 2 * 18 + n_stall) begin
      failures++; $display("busy cycles %0d expected %0d", cycles, exp_mac.size() + 5 * tiles + early_tiles + 36 + n_stall);
    end
    $display("tiles %0d, early exits %0d, stall cycles %0d, busy cycles %0d, MACs %0d", n_tile_evt, n_early_evt, n_stall, cycles, got_mac.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
