// tb_bitfair_csr: programs random layer descriptors into all table slots and
// checks the decoded layer_cfg_t for every layer_idx, the register read-back,
// the start pulse (suppressed while busy), the done bit and the counters.
// The counters are fed a known pattern of performance events (MAC cycles,
// stalls, three finished tiles of which one ended early, suppressed weight
// reads) and their read-back values are worked out by hand from it. The
// register map is this design's own; the paper only lists what the
// configuration registers hold (dimensions, bit order, threshold).
module tb_bitfair_csr;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic req_valid, req_we, rsp_valid, start, busy, done;
  logic [9:0] req_word; logic [31:0] req_wdata, rsp_rdata;
  logic [2:0] layer_idx; layer_cfg_t cfg; logic [3:0] n_layers; perf_evt_t evt; logic [4:0] wskip;
  logic [31:0] words [8][6];
  int checks = 0, failures = 0;
  bitfair_csr dut (.*);

  task automatic wr(input logic [9:0] w, input logic [31:0] d);
    @(negedge clk); req_valid = 1; req_we = 1; req_word = w; req_wdata = d;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask
  task automatic rd(input logic [9:0] w, output logic [31:0] d);
    @(negedge clk); req_valid = 1; req_we = 0; req_word = w;
    @(posedge clk); #1 req_valid = 0;
    @(negedge clk); d = rsp_rdata;
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d; int nstart = 0;
    req_valid = 0; req_we = 0; req_word = 0; req_wdata = 0; layer_idx = 0; busy = 0; done = 0;
    evt = '0; wskip = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 8; l++) for (int w = 0; w < 6; w++) begin
      words[l][w] = $urandom;
      wr(CSR_LAYER0 + 10'(8*l + w), words[l][w]);
    end
    for (int l = 0; l < 8; l++) begin
      layer_idx = 3'(l); #1;
      chk("ich", 32'(cfg.ich), 32'(words[l][0][7:0]));
      chk("och", 32'(cfg.och), 32'(words[l][0][15:8]));
      chk("ih",  32'(cfg.ih),  32'(words[l][0][23:16]));
      chk("iw",  32'(cfg.iw),  32'(words[l][0][31:24]));
      chk("kh",  32'(cfg.kh),  32'(words[l][1][3:0]));
      chk("kw",  32'(cfg.kw),  32'(words[l][1][7:4]));
      chk("nbits", 32'(cfg.nbits), 32'(words[l][1][10:8]));
      chk("relu", 32'(cfg.relu_en), 32'(words[l][1][12]));
      chk("src",  32'(cfg.src_sel), 32'(words[l][1][13]));
      chk("obuf", 32'(cfg.obuf_en), 32'(words[l][1][14]));
      chk("shift", 32'(cfg.out_shift), 32'(words[l][1][19:16]));
      chk("theta", {16'd0, cfg.theta}, 32'(words[l][2][15:0]));
      for (int j = 0; j < 7; j++) chk("order", 32'(cfg.order[j]), 32'(words[l][3][3*j +: 3]));
      chk("in_base",  32'(cfg.in_base),  32'(words[l][4][10:0]));
      chk("out_base", 32'(cfg.out_base), 32'(words[l][4][26:16]));
      chk("w_base",   32'(cfg.w_base),   32'(words[l][5][10:0]));
      rd(CSR_LAYER0 + 10'(8*l + 2), d); chk("readback", d, words[l][2]);
    end
    wr(CSR_NLAYERS, 32'd5); chk("n_layers", 32'(n_layers), 5);
    rd(CSR_NLAYERS, d); chk("n_layers rd", d, 5);
    // start pulse and counters
    fork
      begin
        @(negedge clk); req_valid = 1; req_we = 1; req_word = CSR_CTRL; req_wdata = 1;
        #1 chk("start", 32'(start), 1);
        @(negedge clk); req_valid = 0; req_we = 0;
      end
    join
    busy = 1;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); evt.mac_cycle = (i % 2 == 0); evt.stall = (i < 3); evt.tile_done = (i == 5 || i == 7 || i == 9);
      evt.tile_early = (i == 7); wskip = 5'(i % 4);
    end
    @(negedge clk); evt = '0; wskip = '0;
    // start while busy is ignored
    req_valid = 1; req_we = 1; req_word = CSR_CTRL; req_wdata = 1; #1 chk("start while busy", 32'(start), 0);
    @(negedge clk); req_valid = 0; req_we = 0; busy = 0; done = 1;
    @(negedge clk); done = 0;
    rd(CSR_STATUS, d); chk("status", d, 32'h2);
    rd(CSR_CYCLES, d); chk("cycles", d, 22);
    rd(CSR_MACS, d);   chk("macs", d, 10);
    rd(CSR_STALLS, d); chk("stalls", d, 3);
    rd(CSR_TILES, d);  chk("tiles", d, 3);
    rd(CSR_EARLY, d);  chk("early", d, 1);
    rd(CSR_WSKIP, d);  chk("wskip", d, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
