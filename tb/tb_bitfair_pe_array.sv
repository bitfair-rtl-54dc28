// tb_bitfair_pe_array: drives the full 16x16 array with random tiles (random
// active row/column masks, per-column activations, per-row sign-magnitude
// weight bytes, per-plane bit positions, threshold and bias) and checks every
// PE's terminate flag and output against an integer reference, plus row_done,
// all_done and the per-row weight-read suppression.
module tb_bitfair_pe_array;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [15:0] row_active, col_active, wgt_re, row_done;
  logic clear, mac_en, plane_end, last_plane, latch, relu_en, mac_re, all_done, sat_any;
  bitpos_t shamt; psum_t theta; logic [3:0] out_shift;
  act_t [15:0] act; logic [15:0][7:0] wgt_byte; psum_t [15:0] bias;
  logic [15:0][15:0] term; logic [15:0][15:0][7:0] result;
  int checks = 0, failures = 0;
  int P [16][16]; bit T [16][16];
  bitfair_pe_array dut (.*);

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nplanes, m, th, sh, v, e, n_alldone = 0, n_term = 0, n_sup = 0;
    {clear, mac_en, plane_end, last_plane, latch, relu_en, mac_re} = '0;
    row_active = '0; col_active = '0; shamt = '0; theta = '0; out_shift = '0;
    act = '0; wgt_byte = '0; bias = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      nplanes = $urandom_range(2, 7); m = $urandom_range(1, 6);
      th = $urandom_range(0, 800) - 700; sh = $urandom_range(0, 3);
      @(negedge clk);
      row_active = (trial % 4 == 0) ? 16'hffff : 16'($urandom) | 16'h1;
      col_active = (trial % 4 == 0) ? 16'hffff : 16'($urandom) | 16'h1;
      relu_en = 1; theta = psum_t'(th); out_shift = 4'(sh);
      for (int r = 0; r < 16; r++) bias[r] = psum_t'($urandom_range(0, 100) - 50);
      clear = 1;
      @(negedge clk); clear = 0;
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin P[r][c] = 0; T[r][c] = 0; end
      for (int k = 0; k < nplanes; k++) begin
        automatic bitpos_t s = bitpos_t'($urandom_range(0, 6));
        for (int i = 0; i < m; i++) begin
          mac_en = 1; shamt = s; plane_end = (i == m-1); last_plane = (k == nplanes-1);
          // bias the data negative on some trials so that whole tiles terminate
          for (int c = 0; c < 16; c++) act[c] = act_t'($urandom_range(0, 127));
          for (int r = 0; r < 16; r++) wgt_byte[r] = 8'($urandom) | ((trial % 3 == 0) ? 8'h80 : 8'h00);
          mac_re = 1;
          #1;
          for (int r = 0; r < 16; r++) begin
            checks++;
            if (wgt_re[r] !== !row_done[r]) begin failures++; $display("wgt_re row %0d", r); end
            if (!wgt_re[r]) n_sup++;
          end
          for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++)
            if (row_active[r] && col_active[c] && !T[r][c]) begin
              v = wgt_byte[r][s] ? (wgt_byte[r][7] ? -int'(act[c]) : int'(act[c])) : 0;
              P[r][c] = sat(P[r][c] + v * (1 << s));
              if (i == m-1 && k != nplanes-1 && P[r][c] <= th) T[r][c] = 1;
            end
          @(negedge clk);
        end
        mac_en = 0; mac_re = 0;
        // all_done / row_done after each plane
        begin
          bit ad; ad = 1;
          for (int r = 0; r < 16; r++) begin
            bit rd; rd = 1;
            for (int c = 0; c < 16; c++) if (row_active[r] && col_active[c] && !T[r][c]) rd = 0;
            checks++; if (row_done[r] !== rd) begin failures++; $display("row_done %0d trial %0d exp %0b ra %0b term %h ca %h P0 %0d acc %0d th %0d", r, trial, rd, row_active[r], term[r], col_active, P[r][0], dut.g_row[6].g_col[0].u_pe.acc, th); end
            ad &= rd;
          end
          checks++; if (all_done !== ad) begin failures++; $display("all_done trial %0d", trial); end
          if (ad) n_alldone++;
        end
      end
      plane_end = 0; last_plane = 0; latch = 1;
      @(negedge clk); latch = 0;
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) if (row_active[r] && col_active[c]) begin
        v = sat(P[r][c] + int'(bias[r])) >>> sh;
        e = T[r][c] ? 0 : (v <= 0 ? 0 : (v > 127 ? 127 : v));
        checks += 2;
        if (term[r][c] !== T[r][c]) begin failures++; $display("term (%0d,%0d) trial %0d", r, c, trial); end
        if (result[r][c] !== 8'(e)) begin failures++; $display("result (%0d,%0d) %0d vs %0d", r, c, result[r][c], e); end
        if (T[r][c]) n_term++;
      end
    end
    checks += 3;
    if (n_alldone == 0) begin failures++; $display("all_done never seen"); end
    if (n_term == 0)    begin failures++; $display("no termination"); end
    if (n_sup == 0)     begin failures++; $display("no weight read suppressed"); end
    $display("all_done %0d, terminated %0d, suppressed row reads %0d", n_alldone, n_term, n_sup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
