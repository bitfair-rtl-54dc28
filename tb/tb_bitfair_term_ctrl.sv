// tb_bitfair_term_ctrl: random checks of one row's termination controller:
// row_done is set exactly when every active column has terminated (or the
// row is inactive), the weight read is suppressed then, and the weight bit and
// sign are taken from the right positions of the sign-magnitude byte.
module tb_bitfair_term_ctrl;
  import bitfair_pkg::*;
  logic row_active, mac_re, row_done, wgt_re, wbit, wsign;
  logic [15:0] col_active, term;
  logic [7:0] wgt_byte; bitpos_t shamt;
  int checks = 0, failures = 0, n_done = 0;
  bitfair_term_ctrl dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit exp_done;
    for (int i = 0; i < 3000; i++) begin
      row_active = ($urandom_range(0, 7) != 0);
      col_active = 16'($urandom);
      term       = 16'($urandom);
      if (i % 3 == 0) term = col_active | 16'($urandom) & 16'($urandom);
      mac_re   = 1'($urandom);
      wgt_byte = 8'($urandom);
      shamt    = bitpos_t'($urandom_range(0, 6));
      #1;
      exp_done = 1;
      for (int c = 0; c < 16; c++) if (col_active[c] && !term[c]) exp_done = 0;
      if (!row_active) exp_done = 1;
      checks += 4;
      if (row_done !== exp_done)            begin failures++; $display("row_done mismatch %0d", i); end
      if (wgt_re !== (mac_re && !exp_done)) begin failures++; $display("wgt_re mismatch %0d", i); end
      if (wbit !== ((wgt_byte >> shamt) & 1)) begin failures++; $display("wbit mismatch %0d", i); end
      if (wsign !== wgt_byte[7])            begin failures++; $display("wsign mismatch %0d", i); end
      if (exp_done && row_active) n_done++;
    end
    checks++; if (n_done == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
