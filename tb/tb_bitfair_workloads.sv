// tb_bitfair_workloads: runs the two evaluation networks that fit on chip
// through the complete accelerator at its default size.
//
//   MNIST-sized:   28x28x1 input, conv 3x3 with 8-16-32-32 channels
//   N-MNIST-sized: 34x34x2 input (one event bin of two polarity channels),
//                  conv 3x3 with 16-16-32-32 channels
//
// Input sizes and channel counts are those of the evaluated networks; the
// 3x3 kernels, stride 1, no padding and no pooling are this testbench's
// choice (the accelerator has no pooling stage), and the weights, biases and
// inputs are random, not trained. Weights use all 7 magnitude planes. Each
// layer's threshold is set a little below zero, in the range a trained
// threshold takes, and its bit order alternates between MSB-first and a
// permuted order. The requantisation shift of each layer is chosen from the
// reference model's output range so that activations stay in 0..127.
//
// Both networks are loaded over AXI4-Lite (weights packed back to back in
// the weight SRAM, feature maps ping-ponging between SRAM A and B), run with
// one start command each, and the outputs of the last two layers are read
// back and compared with an integer model of the bit-serial computation. The
// MAC-cycle counter must equal the model's count. Printed for each network:
// the speed-up over always processing all 7 planes (time saved by whole
// tiles ending early) and the share of per-output bit planes that
// terminated PEs skipped (datapath and weight-operand work saved).
module tb_bitfair_workloads;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready;
  logic s_rvalid, s_rready, irq; logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp;
  int checks = 0, failures = 0;

  bitfair_top dut (.*);

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
  function automatic logic [31:0] csr_addr(logic [9:0] w);
    return 32'(w) << 2;
  endfunction
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  typedef struct {
    int ich, och, ih, iw, kh, kw, nbits, relu, src, shift, theta, w_base;
    int order[7];
  } layer_t;
  localparam int NL = 4;
  layer_t L [NL];
  int fmap [NL+1][];
  int wgt  [NL][];
  int bias [NL][];
  int exp_macs, vanilla_macs, exp_terms;
  longint pe_planes, pe_planes_all;   // bit planes processed per output, summed

  // Reference model of one layer. Computes the final partial sums and the
  // termination plane of every output first, picks the shift, then forms the
  // outputs and counts the MAC cycles the controller must spend.
  task automatic ref_layer(input int l);
    layer_t c = L[l];
    int OH = c.ih - c.kh + 1, OW = c.iw - c.kw + 1, KK = c.kh * c.kw * c.ich;
    int psum [], tpl [];
    int vmax = 0;
    psum = new[c.och * OH * OW]; tpl = new[c.och * OH * OW];
    fmap[l+1] = new[c.och * OH * OW];
    foreach (psum[i]) begin
      int oc = i / (OH * OW), oh = (i / OW) % OH, ow = i % OW, P = 0, tp = -1;
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
      psum[i] = P; tpl[i] = tp;
      if (tp < 0 && sat(P + bias[l][oc]) > vmax) vmax = sat(P + bias[l][oc]);
    end
    L[l].shift = 0;
    while ((vmax >>> L[l].shift) > 255 && L[l].shift < 15) L[l].shift++;
    foreach (psum[i]) begin
      int oc = i / (OH * OW), v = sat(psum[i] + bias[l][oc]) >>> L[l].shift;
      fmap[l+1][i] = (tpl[i] >= 0 || v <= 0) ? 0 : (v > 127 ? 127 : v);
      if (tpl[i] >= 0) exp_terms++;
      pe_planes += (tpl[i] >= 0) ? tpl[i] + 1 : c.nbits; pe_planes_all += c.nbits;
    end
    // MAC cycles per tile: a tile ends after the plane in which its last
    // active PE terminated, if all of them did, plus one cycle for the exit
    for (int oh = 0; oh < OH; oh++)
      for (int oc0 = 0; oc0 < c.och; oc0 += 16)
        for (int ow0 = 0; ow0 < OW; ow0 += 16) begin
          int last = -1; bit all_term = 1;
          for (int r = 0; r < 16 && oc0 + r < c.och; r++)
            for (int cc = 0; cc < 16 && ow0 + cc < OW; cc++) begin
              int tp = tpl[((oc0 + r) * OH + oh) * OW + ow0 + cc];
              if (tp < 0) all_term = 0; else if (tp > last) last = tp;
            end
          vanilla_macs += c.nbits * KK;
          exp_macs += (all_term && last >= 0) ? (last + 1) * KK + 1 : c.nbits * KK;
        end
  endtask

  task automatic run_net(input string name, input int in_ch, input int in_hw, input int ch[NL], input bit signed_in);
    int wb = 0, KK, IWB, OH, OW, OWB;
    logic [31:0] d, macs, cyc;
    exp_macs = 0; vanilla_macs = 0; exp_terms = 0; pe_planes = 0; pe_planes_all = 0;
    for (int l = 0; l < NL; l++) begin
      L[l].ich = (l == 0) ? in_ch : ch[l-1]; L[l].och = ch[l];
      L[l].ih = in_hw - 2 * l; L[l].iw = in_hw - 2 * l; L[l].kh = 3; L[l].kw = 3;
      L[l].nbits = 7; L[l].relu = 1; L[l].src = l % 2; L[l].w_base = wb;
      L[l].order = (l % 2) ? '{6, 5, 4, 3, 2, 1, 0} : '{5, 6, 4, 3, 2, 0, 1};
      KK = 9 * L[l].ich;
      wb += ((L[l].och + 15) / 16) * (KK + 2);
      wgt[l] = new[L[l].och * KK]; bias[l] = new[L[l].och];
      foreach (wgt[l][i]) wgt[l][i] = ($urandom_range(0, 1) << 7) | ($urandom_range(0, 127) >> $urandom_range(1, 4));
      foreach (bias[l][i]) bias[l][i] = $urandom_range(0, 400) - 200;
      L[l].theta = -40 * KK;
    end
    fmap[0] = new[in_ch * in_hw * in_hw];
    foreach (fmap[0][i]) fmap[0][i] = signed_in ? int'($urandom_range(0, 255)) - 128 : int'($urandom_range(0, 20));
    for (int l = 0; l < NL; l++) ref_layer(l);

    IWB = (in_hw + 15) / 16;
    for (int ic = 0; ic < in_ch; ic++) for (int y = 0; y < in_hw; y++) for (int x = 0; x < in_hw; x++)
      axi_write(act_addr(0, (ic * in_hw + y) * IWB + x / 16, x % 16), 32'(fmap[0][(ic * in_hw + y) * in_hw + x] & 255));
    for (int l = 0; l < NL; l++) begin
      automatic logic [31:0] ord = 0;
      KK = 9 * L[l].ich;
      for (int oc = 0; oc < L[l].och; oc++) begin
        automatic int gb = L[l].w_base + (oc / 16) * (KK + 2);
        axi_write(wgt_addr(gb, oc % 16), 32'(bias[l][oc] & 255));
        axi_write(wgt_addr(gb + 1, oc % 16), 32'((bias[l][oc] >> 8) & 255));
        for (int i = 0; i < KK; i++) axi_write(wgt_addr(gb + 2 + i, oc % 16), 32'(wgt[l][oc * KK + i]));
      end
      for (int j = 0; j < 7; j++) ord |= 32'(L[l].order[j]) << (3 * j);
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 0)), 32'(L[l].ich | (L[l].och << 8) | (L[l].ih << 16) | (L[l].iw << 24)));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 1)), 32'(L[l].kh | (L[l].kw << 4) | (L[l].nbits << 8) | (L[l].relu << 12)
                                                      | (L[l].src << 13) | (L[l].shift << 16)));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 2)), 32'(L[l].theta & 16'hffff));
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 3)), ord);
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 4)), 32'h0);
      axi_write(csr_addr(CSR_LAYER0 + 10'(8*l + 5)), 32'(L[l].w_base));
    end
    axi_write(csr_addr(CSR_NLAYERS), NL);
    axi_write(csr_addr(CSR_CTRL), 1);
    while (!irq) @(negedge clk);

    // outputs of the last two layers (the earlier ones are overwritten)
    for (int l = NL - 2; l < NL; l++) begin
      automatic int sel = L[l].src ? 0 : 1, bad = 0;
      OH = L[l].ih - 2; OW = L[l].iw - 2; OWB = (OW + 15) / 16;
      for (int oc = 0; oc < L[l].och; oc++) for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) begin
        automatic int e = fmap[l+1][(oc * OH + y) * OW + x] & 255;
        axi_read(act_addr(sel, (oc * OH + y) * OWB + x / 16, x % 16), d);
        checks++;
        if (d !== 32'(e)) begin
          failures++; bad++;
          if (bad < 5) $display("%s layer %0d out (%0d,%0d,%0d): %0d expected %0d", name, l, oc, y, x, d, e);
        end
      end
    end
    axi_read(csr_addr(CSR_MACS), macs);
    axi_read(csr_addr(CSR_CYCLES), cyc);
    checks++; if (macs != 32'(exp_macs)) begin failures++; $display("%s: MAC cycles %0d expected %0d", name, macs, exp_macs); end
    checks++; if (exp_terms == 0) begin failures++; $display("%s: no output terminated early", name); end
    $display("%s: weights %0d words per bank, busy cycles %0d, MAC cycles %0d, all-planes MAC cycles %0d, speed-up %0.3f, outputs terminated %0d, PE bit planes processed %0d of %0d (%0.1f%% saved)",
             name, wb, cyc, macs, vanilla_macs, real'(vanilla_macs) / real'(macs), exp_terms, pe_planes, pe_planes_all,
             100.0 * (1.0 - real'(pe_planes) / real'(pe_planes_all)));
  endtask

  initial begin
    repeat (20000000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_arvalid = 0;
    s_bready = 0; s_rready = 0; s_wstrb = 0;
    repeat (4) @(negedge clk); rst_n = 1;
    run_net("MNIST-sized", 1, 28, '{8, 16, 32, 32}, 1'b1);
    run_net("N-MNIST-sized", 2, 34, '{16, 16, 32, 32}, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
