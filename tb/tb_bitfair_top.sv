// tb_bitfair_top: end-to-end test of the accelerator at its default size.
//
// Through the AXI4-Lite port the testbench loads a three-layer network (input
// feature map and sign-magnitude weights with biases), programs the layer
// table, starts the run, waits for the interrupt and reads the results back.
//   layer 0: 2 -> 20 channels, 3x3, 10x20 input, 7 bit planes, custom bit
//            order, ReLU with early termination; channels 16..19 have only
//            negative weights on a non-negative input, so their tiles end
//            early as a whole. Reads SRAM A, writes SRAM B.
//   layer 1: 20 -> 10 channels, 3x3, 4 bit planes, ReLU. B -> A.
//   layer 2: 10 -> 4 channels, 1x1, 1 bit plane, no ReLU (classifier-like
//            layer, signed outputs), copied into the output buffer. A -> B.
//            Its tiles are shorter than the 16-cycle write-back, so the
//            controller has to stall.
// An integer reference model of the bit-serial computation (planes in the
// programmed order, 16-bit saturation, threshold test after each plane,
// bias, ReLU, shift, clamp) gives every expected output and the exact number
// of MAC cycles the controller should spend, including the early tile exits.
// Checks all outputs of layers 1 and 2, the output buffer, the MAC-cycle
// count, and that each mechanism happened: PE early termination, whole-tile
// early exit, weight-read suppression, write-back stall, non-ReLU mode.
module tb_bitfair_top;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready;
  logic s_rvalid, s_rready, irq; logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp;
  int checks = 0, failures = 0;

  bitfair_top dut (.*);

  // ---------------- host bus tasks ----------------
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1; s_wstrb = 4'hf;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(posedge clk); #0 s_bready = 0;
  endtask
  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk); #0 s_rready = 0;
  endtask
  function automatic logic [31:0] act_addr(int sel, int word, int bank);
    return 32'h40000 | 32'(((sel << 15) | (word << 4) | bank) << 2);
  endfunction
  function automatic logic [31:0] wgt_addr(int word, int bank);
    return 32'h80000 | 32'(((word << 4) | bank) << 2);
  endfunction
  function automatic logic [31:0] obuf_addr(int word, int bank);
    return 32'hC0000 | 32'(((word << 4) | bank) << 2);
  endfunction
  function automatic logic [31:0] csr_addr(logic [9:0] w);
    return 32'(w) << 2;
  endfunction

  // ---------------- network description ----------------
  typedef struct {
    int ich, och, ih, iw, kh, kw, nbits, relu, src, obuf, shift, theta, in_base, out_base, w_base;
    int order[7];
  } layer_t;
  localparam int NL = 3;
  layer_t L [NL];
  // tensors, flattened
  int fmap [NL+1][];      // fmap[l][(c*H + y)*W + x], signed 8-bit values
  int wgt  [NL][];        // sign-magnitude bytes, [((oc*KH + kh)*KW + kw)*ICH + ic]
  int bias [NL][];
  int exp_macs = 0, exp_terms = 0, exp_early_tiles = 0, vanilla_macs = 0;

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  // reference model of one layer; also counts MAC cycles per tile
  task automatic ref_layer(input int l);
    layer_t c = L[l];
    int OH = c.ih - c.kh + 1, OW = c.iw - c.kw + 1, KK = c.kh * c.kw * c.ich;
    int tplane [16][16];
    fmap[l+1] = new[c.och * OH * OW];
    for (int oh = 0; oh < OH; oh++)
      for (int oc0 = 0; oc0 < c.och; oc0 += 16)
        for (int ow0 = 0; ow0 < OW; ow0 += 16) begin
          int last_term_plane = -1;   // max over PEs of the plane after which each stopped
          bit all_term = 1;
          for (int r = 0; r < 16; r++) for (int cc = 0; cc < 16; cc++) begin
            int oc = oc0 + r, ow = ow0 + cc, P = 0, tp = -1, v, res;
            if (oc >= c.och || ow >= OW) continue;
            for (int j = 0; j < c.nbits && tp < 0; j++) begin
              int bp = c.order[j];
              for (int kh = 0; kh < c.kh; kh++) for (int kw = 0; kw < c.kw; kw++)
                for (int ic = 0; ic < c.ich; ic++) begin
                  int w = wgt[l][((oc * c.kh + kh) * c.kw + kw) * c.ich + ic];
                  int a = fmap[l][(ic * c.ih + oh + kh) * c.iw + ow + kw];
                  if ((w >> bp) & 1) P = sat(P + ((w & 128) ? -a : a) * (1 << bp));
                end
              if (j < c.nbits - 1 && c.relu && P <= c.theta) tp = j;
            end
            v = sat(P + bias[l][oc]) >>> c.shift;
            if (c.relu) res = (tp >= 0) ? 0 : (v <= 0 ? 0 : (v > 127 ? 127 : v));
            else        res = v > 127 ? 127 : (v < -128 ? -128 : v);
            fmap[l+1][(oc * OH + oh) * OW + ow] = res;
            if (tp >= 0) begin exp_terms++; if (tp > last_term_plane) last_term_plane = tp; end
            else all_term = 0;
          end
          vanilla_macs += c.nbits * KK;
          if (all_term && last_term_plane >= 0) begin
            exp_macs += (last_term_plane + 1) * KK + 1;
            exp_early_tiles++;
          end else exp_macs += c.nbits * KK;
        end
  endtask

  initial begin
    repeat (3000000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    int OH, OW, OWB, IWB, KK, t0, t1;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_arvalid = 0;
    s_bready = 0; s_rready = 0; s_wstrb = 0;
    // layer table
    L[0] = '{ich:2,  och:20, ih:10, iw:20, kh:3, kw:3, nbits:7, relu:1, src:0, obuf:0, shift:4, theta:-300,
              in_base:0, out_base:0, w_base:0,   order:'{5, 6, 4, 3, 2, 1, 0}};
    L[1] = '{ich:20, och:10, ih:8,  iw:18, kh:3, kw:3, nbits:4, relu:1, src:1, obuf:0, shift:5, theta:-150,
              in_base:0, out_base:0, w_base:100, order:'{6, 5, 4, 3, 0, 0, 0}};
    L[2] = '{ich:10, och:4,  ih:6,  iw:16, kh:1, kw:1, nbits:1, relu:0, src:0, obuf:1, shift:0, theta:0,
              in_base:0, out_base:0, w_base:400, order:'{6, 0, 0, 0, 0, 0, 0}};
    // input: non-negative, like binned event counts
    fmap[0] = new[L[0].ich * L[0].ih * L[0].iw];
    foreach (fmap[0][i]) fmap[0][i] = $urandom_range(0, 40);
    for (int l = 0; l < NL; l++) begin
      KK = L[l].kh * L[l].kw * L[l].ich;
      wgt[l] = new[L[l].och * KK];
      bias[l] = new[L[l].och];
      for (int oc = 0; oc < L[l].och; oc++) begin
        bias[l][oc] = $urandom_range(0, 200) - 100;
        for (int i = 0; i < KK; i++) begin
          automatic int mag = $urandom_range(0, 127) >> $urandom_range(0, 3);
          automatic int neg = $urandom_range(0, 1);
          if (l == 0 && oc >= 16) neg = 1;
          wgt[l][oc * KK + i] = (neg << 7) | mag;
        end
      end
    end
    for (int l = 0; l < NL; l++) ref_layer(l);

    repeat (4) @(negedge clk); rst_n = 1;
    // ---- load the input feature map into SRAM A ----
    IWB = (L[0].iw + 15) / 16;
    for (int ic = 0; ic < L[0].ich; ic++) for (int y = 0; y < L[0].ih; y++) for (int x = 0; x < L[0].iw; x++)
      axi_write(act_addr(0, L[0].in_base + (ic * L[0].ih + y) * IWB + x / 16, x % 16),
                32'(fmap[0][(ic * L[0].ih + y) * L[0].iw + x] & 255));
    // ---- load weights and biases ----
    for (int l = 0; l < NL; l++) begin
      KK = L[l].kh * L[l].kw * L[l].ich;
      for (int oc = 0; oc < L[l].och; oc++) begin
        automatic int gb = L[l].w_base + (oc / 16) * (KK + 2);
        axi_write(wgt_addr(gb, oc % 16), 32'(bias[l][oc] & 255));
        axi_write(wgt_addr(gb + 1, oc % 16), 32'((bias[l][oc] >> 8) & 255));
        for (int i = 0; i < KK; i++) axi_write(wgt_addr(gb + 2 + i, oc % 16), 32'(wgt[l][oc * KK + i]));
      end
    end
    // ---- layer table ----
    for (int l = 0; l < NL; l++) begin
      automatic logic [31:0] ord = 0;
      for (int j = 0; j < 7; j++) ord |= 32'(L[l].order[j]) << (3 * j);
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 0)), 32'(L[l].ich | (L[l].och << 8) | (L[l].ih << 16) | (L[l].iw << 24)));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 1)), 32'(L[l].kh | (L[l].kw << 4) | (L[l].nbits << 8) | (L[l].relu << 12)
                                                      | (L[l].src << 13) | (L[l].obuf << 14) | (L[l].shift << 16)));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 2)), 32'(L[l].theta & 16'hffff));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 3)), ord);
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 4)), 32'(L[l].in_base | (L[l].out_base << 16)));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 5)), 32'(L[l].w_base));
    end
    axi_write(csr_addr(CSR_NLAYERS), NL);
    // ---- run ----
    t0 = $time;
    axi_write(csr_addr(CSR_CTRL), 1);
    while (!irq) @(negedge clk);
    t1 = $time;
    axi_read(csr_addr(CSR_STATUS), d);
    checks++; if (d[1:0] !== 2'b10) begin failures++; $display("status %h", d); end

    // ---- layer 1 output in SRAM A, layer 2 output in SRAM B and the output buffer ----
    for (int l = 1; l < NL; l++) begin
      automatic int sel = L[l].src ? 0 : 1;
      OH = L[l].ih - L[l].kh + 1; OW = L[l].iw - L[l].kw + 1; OWB = (OW + 15) / 16;
      for (int oc = 0; oc < L[l].och; oc++) for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) begin
        automatic int e = fmap[l+1][(oc * OH + y) * OW + x] & 255;
        automatic int wd = (oc * OH + y) * OWB + x / 16;
        axi_read(act_addr(sel, L[l].out_base + wd, x % 16), d);
        checks++;
        if (d !== 32'(e)) begin
          failures++;
          if (failures < 10) $display("layer %0d out (%0d,%0d,%0d): %0d expected %0d", l, oc, y, x, d, e);
        end
        if (L[l].obuf) begin
          axi_read(obuf_addr(wd, x % 16), d);
          checks++; if (d !== 32'(e)) begin failures++; if (failures < 10) $display("obuf (%0d,%0d,%0d)", oc, y, x); end
        end
      end
    end

    // ---- counters and mechanisms ----
    begin
      logic [31:0] macs, early, stalls, wskip, tiles, cyc;
      axi_read(csr_addr(CSR_MACS), macs);
      axi_read(csr_addr(CSR_EARLY), early);
      axi_read(csr_addr(CSR_STALLS), stalls);
      axi_read(csr_addr(CSR_WSKIP), wskip);
      axi_read(csr_addr(CSR_TILES), tiles);
      axi_read(csr_addr(CSR_CYCLES), cyc);
      $display("busy cycles %0d, MAC cycles %0d (no early termination: %0d, speed-up %0.3f)", cyc, macs,
               vanilla_macs, real'(vanilla_macs) / real'(macs));
      $display("tiles %0d, tiles ended early %0d, PE outputs terminated %0d, stall cycles %0d, suppressed weight reads %0d",
               tiles, early, exp_terms, stalls, wskip);
      checks++; if (macs != 32'(exp_macs)) begin failures++; $display("MAC cycles %0d expected %0d", macs, exp_macs); end
      checks++; if (early != 32'(exp_early_tiles)) begin failures++; $display("early tiles %0d expected %0d", early, exp_early_tiles); end
      // every mechanism must have happened at least once
      checks++; if (exp_terms == 0) begin failures++; $display("no PE terminated early"); end
      checks++; if (early == 0)     begin failures++; $display("no tile ended early"); end
      checks++; if (wskip == 0)     begin failures++; $display("no weight read suppressed"); end
      checks++; if (stalls == 0)    begin failures++; $display("no write-back stall"); end
      checks++; if (tiles == 0)     begin failures++; $display("no tiles"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
