// tb_bitfair_out_buf: writes random 16-byte rows with random masks through the
// write-back port and reads every byte back through the host port, comparing
// with a byte-array model that applies the same masks. The host read data
// are checked one cycle after the request, the read latency of the banks.
// Bank organisation (16 x 512 bytes) is this design's choice; the 8 KB size
// is the paper's.
module tb_bitfair_out_buf;
  import bitfair_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic wr_en, host_en; logic [8:0] wr_word, host_word; logic [15:0] wr_mask;
  logic [15:0][7:0] wr_data; logic [3:0] host_bank; logic [7:0] host_rdata;
  logic [7:0] model [512][16];
  int checks = 0, failures = 0;
  bitfair_out_buf dut (.*);
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; host_en = 0; wr_word = '0; host_word = '0; wr_mask = '0; wr_data = '0; host_bank = '0;
    for (int w = 0; w < 512; w++) begin
      @(negedge clk); wr_en = 1; wr_word = 9'(w); wr_mask = '1;
      for (int b = 0; b < 16; b++) begin wr_data[b] = 8'($urandom); model[w][b] = wr_data[b]; end
    end
    for (int i = 0; i < 200; i++) begin
      automatic int w = $urandom_range(0, 511);
      @(negedge clk); wr_en = 1; wr_word = 9'(w); wr_mask = 16'($urandom);
      for (int b = 0; b < 16; b++) begin
        wr_data[b] = 8'($urandom); if (wr_mask[b]) model[w][b] = wr_data[b];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int w = 0; w < 512; w += 3) for (int b = 0; b < 16; b++) begin
      @(negedge clk); host_en = 1; host_bank = 4'(b); host_word = 9'(w);
      @(negedge clk); host_en = 0;
      checks++; if (host_rdata !== model[w][b]) begin failures++; $display("w %0d b %0d", w, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
