// tb_bitfair_axi_lite: an AXI4-Lite master writes random words to random
// addresses and reads them back through the slave. The testbench answers the
// core-side request bus with a small memory that accepts requests after a
// random delay and responds one cycle later. Checks the read data, the OKAY
// responses, that every write reached the core with the right address and
// data, and that a write and a read offered together are both served.
// The master holds BREADY/RREADY low for a random 0-3 cycles after a
// response appears and checks that BVALID/RVALID and RDATA stay put, the
// AXI rule that a response is held until it is accepted.
module tb_bitfair_axi_lite;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata, req_wdata, rsp_rdata;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready;
  logic s_rvalid, s_rready, req_valid, req_ready, req_we, rsp_valid;
  logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp; logic [HADDR_W-1:0] req_addr;
  logic [31:0] mem [1024];
  int checks = 0, failures = 0, n_core_wr = 0;
  bitfair_axi_lite dut (.*);

  // core-side responder
  always_ff @(posedge clk) begin
    rsp_valid <= req_valid && req_ready;
    if (req_valid && req_ready) begin
      if (req_we) begin mem[req_addr[11:2]] <= req_wdata; n_core_wr++; end
      rsp_rdata <= mem[req_addr[11:2]];
    end
  end
  always @(negedge clk) req_ready = ($urandom_range(0, 2) == 0);

  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1; s_wstrb = 4'hf;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    // the response must be held until the master takes it
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk); checks++; if (!s_bvalid) failures++;
    end
    s_bready = 1;
    checks++; if (s_bresp !== 2'b00) failures++;
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk); checks++; if (!s_rvalid || s_rdata !== d) failures++;
    end
    s_rready = 1;
    checks++; if (s_rresp !== 2'b00) failures++;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] model [1024];
    logic [31:0] d;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_arvalid = 0;
    s_bready = 0; s_rready = 0; s_wstrb = 0;
    for (int i = 0; i < 1024; i++) begin mem[i] = 0; model[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      automatic int a = $urandom_range(0, 1023);
      automatic logic [31:0] v = $urandom;
      axi_write(32'(a) << 2, v); model[a] = v;
      a = $urandom_range(0, 1023);
      axi_read(32'(a) << 2, d);
      checks++; if (d !== model[a]) begin failures++; $display("read %0d: %h vs %h", a, d, model[a]); end
    end
    // write and read offered in the same cycle: both must complete
    @(negedge clk);
    s_awaddr = 32'h40; s_wdata = 32'hcafe0001; s_awvalid = 1; s_wvalid = 1; s_araddr = 32'h40; s_arvalid = 1;
    s_bready = 1; s_rready = 1;
    begin
      bit got_b, got_r; got_b = 0; got_r = 0;
      for (int t = 0; t < 200 && !(got_b && got_r); t++) begin
        @(posedge clk);
        if (s_awready) begin s_awvalid <= 0; s_wvalid <= 0; end
        if (s_arready) s_arvalid <= 0;
        if (s_bvalid) got_b = 1;
        if (s_rvalid) begin got_r = 1; d = s_rdata; end
      end
      checks += 2;
      if (!got_b || !got_r) begin failures++; $display("concurrent write/read not both served"); end
      if (d !== 32'hcafe0001) begin failures++; $display("read after concurrent write: %h", d); end
    end
    checks++; if (n_core_wr != 301) begin failures++; $display("core writes %0d", n_core_wr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
