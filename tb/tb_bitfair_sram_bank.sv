// tb_bitfair_sram_bank: writes random bytes to random addresses, reads them
// back with the one-cycle read latency and compares with an array model. It
// also checks that rdata holds its value while re is low (the property the
// weight path relies on when a terminated row's reads are suppressed) and
// that a write in the same cycle as a read request takes priority.
module tb_bitfair_sram_bank;
  logic clk = 0; always #5 clk = ~clk;
  logic re, we; logic [10:0] addr; logic [7:0] wdata, rdata;
  logic [7:0] model [2048];
  int checks = 0, failures = 0;
  bitfair_sram_bank #(.DEPTH(2048), .DW(8)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [7:0] held;
    re = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); we = 1; addr = 11'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      automatic int a = $urandom_range(0, 2047);
      @(negedge clk); re = 1; addr = 11'(a);
      @(negedge clk); re = 0; held = rdata;
      checks++; if (rdata !== model[a]) begin failures++; $display("read %0d: %h vs %h", a, rdata, model[a]); end
      addr = 11'($urandom);
      @(negedge clk);
      checks++; if (rdata !== held) begin failures++; $display("rdata not held"); end
    end
    // write and read requested together: the write wins, rdata keeps its value
    for (int i = 0; i < 200; i++) begin
      automatic int a = $urandom_range(0, 2047);
      @(negedge clk); held = rdata; re = 1; we = 1; addr = 11'(a); wdata = 8'($urandom); model[a] = wdata;
      @(negedge clk); we = 0; re = 1;
      checks++; if (rdata !== held) begin failures++; $display("write did not take priority"); end
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[a]) begin failures++; $display("write lost at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
