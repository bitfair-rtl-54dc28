// tb_bitfair_wgt_sram: loads random weights through the host port, reads all
// 16 banks at one address with random per-bank enables, and checks that an
// enabled bank returns its byte while a disabled (suppressed) bank keeps its
// previous output.
module tb_bitfair_wgt_sram;
  import bitfair_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic [15:0] rd_en; logic [10:0] rd_word, host_word; logic [15:0][7:0] wgt_q;
  logic host_en, host_we; logic [3:0] host_bank; logic [7:0] host_wdata, host_rdata;
  logic [7:0] model [16][64];
  int checks = 0, failures = 0;
  bitfair_wgt_sram dut (.*);
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [15:0][7:0] prev;
    logic [15:0] en;
    rd_en = '0; rd_word = '0; host_en = 0; host_we = 0; host_bank = '0; host_word = '0; host_wdata = '0;
    for (int b = 0; b < 16; b++) for (int w = 0; w < 64; w++) begin
      model[b][w] = 8'($urandom);
      @(negedge clk); host_en = 1; host_we = 1; host_bank = 4'(b); host_word = 11'(w); host_wdata = model[b][w];
    end
    @(negedge clk); host_en = 0; host_we = 0;
    for (int i = 0; i < 300; i++) begin
      automatic int w = $urandom_range(0, 63);
      prev = wgt_q; en = 16'($urandom);
      @(negedge clk); rd_en = en; rd_word = 11'(w);
      @(negedge clk); rd_en = '0;
      for (int b = 0; b < 16; b++) begin
        checks++;
        if (en[b] ? (wgt_q[b] !== model[b][w]) : (wgt_q[b] !== prev[b])) begin
          failures++; $display("bank %0d word %0d en %0b: %h", b, w, en[b], wgt_q[b]);
        end
      end
    end
    // host read-back
    for (int i = 0; i < 50; i++) begin
      automatic int b = $urandom_range(0, 15); automatic int w = $urandom_range(0, 63);
      @(negedge clk); host_en = 1; host_bank = 4'(b); host_word = 11'(w);
      @(negedge clk); host_en = 0;
      checks++; if (host_rdata !== model[b][w]) begin failures++; $display("host read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
