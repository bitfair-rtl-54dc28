// tb_bitfair_act_sram: loads a random feature map through the host port in
// the interleaved layout (pixel x of a row in bank x mod 16, word row*RW +
// x/16), then reads 16-pixel column vectors starting at arbitrary x offsets
// and checks that column c receives pixel xoff+c. Also writes one output row
// through the write-back port with a byte mask and reads it back.
module tb_bitfair_act_sram;
  import bitfair_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  localparam int RW = 3;       // words per row: rows of up to 48 pixels
  localparam int NROWS = 40;
  logic rd_en, wr_en, host_en, host_we;
  logic [10:0] rd_row_base, wr_word, host_word;
  logic [8:0] rd_xoff;
  act_t [15:0] col_data;
  logic [15:0] wr_mask;
  logic [15:0][7:0] wr_data;
  logic [3:0] host_bank;
  logic [7:0] host_wdata, host_rdata;
  logic [7:0] img [NROWS][RW*16];
  int checks = 0, failures = 0;
  bitfair_act_sram dut (.*);
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    {rd_en, wr_en, host_en, host_we} = '0;
    rd_row_base = '0; wr_word = '0; host_word = '0; rd_xoff = '0; wr_mask = '0; wr_data = '0;
    host_bank = '0; host_wdata = '0;
    for (int y = 0; y < NROWS; y++) for (int x = 0; x < RW*16; x++) begin
      img[y][x] = 8'($urandom);
      @(negedge clk); host_en = 1; host_we = 1; host_bank = 4'(x % 16);
      host_word = 11'(y*RW + x/16); host_wdata = img[y][x];
    end
    @(negedge clk); host_en = 0; host_we = 0;
    for (int i = 0; i < 500; i++) begin
      automatic int y = $urandom_range(0, NROWS-1);
      automatic int xo = $urandom_range(0, RW*16 - 16);
      @(negedge clk); rd_en = 1; rd_row_base = 11'(y*RW); rd_xoff = 9'(xo);
      @(negedge clk); rd_en = 0;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (col_data[c] !== act_t'(img[y][xo+c])) begin
          failures++; $display("row %0d xoff %0d col %0d: %h vs %h", y, xo, c, col_data[c], img[y][xo+c]);
        end
      end
    end
    // write-back of one row, odd banks masked off
    @(negedge clk); wr_en = 1; wr_word = 11'(1000); wr_mask = 16'h5555;
    for (int b = 0; b < 16; b++) wr_data[b] = 8'(b * 7 + 3);
    @(negedge clk); wr_en = 0;
    for (int b = 0; b < 16; b++) begin
      @(negedge clk); host_en = 1; host_we = 0; host_bank = 4'(b); host_word = 11'(1000);
      @(negedge clk); host_en = 0;
      checks++;
      if (b % 2 == 0 && host_rdata !== 8'(b * 7 + 3)) begin failures++; $display("wb bank %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
