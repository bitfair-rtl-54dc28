// tb_bitfair_pe: self-checking test of one bit-serial PE.
//
// Random outputs are computed bit plane by bit plane with random activations,
// weight bits, signs, bit positions, thresholds, biases and shifts. A
// reference model in plain integer arithmetic follows the rules of the
// design: partial sum with 16-bit saturation, termination test P <= theta
// after every plane but the last (ReLU layers only), output zero if
// terminated, else ReLU(P + bias) >> shift clamped to 8 bits (signed clamp
// without ReLU). Checks the terminate flag, the 8-bit result, and that an
// inactive PE does not accumulate.
module tb_bitfair_pe;
  import bitfair_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic active, clear, mac_en, plane_end, last_plane, wbit, wsign, relu_en, latch, term, sat_evt;
  act_t act; bitpos_t shamt; psum_t theta, o_prev; logic [3:0] out_shift; logic [7:0] result;
  int checks = 0, failures = 0;

  bitfair_pe dut (.*);

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int P, nplanes, m, th, b, sh, a, exp_res, v, n_term = 0;
    bit t, relu, act_i;
    {active, clear, mac_en, plane_end, last_plane, wbit, wsign, relu_en, latch} = '0;
    act = '0; shamt = '0; theta = '0; o_prev = '0; out_shift = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 400; trial++) begin
      nplanes = 1 + $urandom_range(0, 6);
      m       = 1 + $urandom_range(0, 7);
      th      = $urandom_range(0, 3000) - 2500;
      if (trial % 10 == 9) th = $urandom_range(0, 60000) - 30000;
      b       = $urandom_range(0, 400) - 200;
      sh      = $urandom_range(0, 5);
      relu    = ($urandom_range(0, 5) != 0);
      act_i   = ($urandom_range(0, 9) != 0);
      @(negedge clk);
      active = act_i; relu_en = relu; theta = psum_t'(th); o_prev = psum_t'(b); out_shift = 4'(sh);
      clear = 1;
      @(negedge clk);
      clear = 0;
      P = 0; t = 0;
      for (int k = 0; k < nplanes; k++) begin
        automatic bitpos_t s = bitpos_t'($urandom_range(0, 6));
        for (int i = 0; i < m; i++) begin
          a = $urandom_range(0, 255) - 128;
          mac_en = 1; act = act_t'(a); wbit = 1'($urandom); wsign = 1'($urandom); shamt = s;
          plane_end = (i == m - 1); last_plane = (k == nplanes - 1);
          if (act_i && !t) begin
            v = wbit ? (wsign ? -a : a) : 0;
            P = sat(P + v * (1 << s));
            if (i == m - 1 && k != nplanes - 1 && relu && P <= th) t = 1;
          end
          @(negedge clk);
        end
      end
      mac_en = 0; plane_end = 0; last_plane = 0;
      latch = 1;
      @(negedge clk);
      latch = 0;
      v = sat(P + b) >>> sh;
      if (relu) exp_res = t ? 0 : (v <= 0 ? 0 : (v > 127 ? 127 : v));
      else      exp_res = v > 127 ? 127 : (v < -128 ? -128 : v);
      checks += 2;
      if (term !== t) begin failures++; $display("trial %0d: term %0b expected %0b", trial, term, t); end
      if (result !== 8'(exp_res)) begin
        failures++; $display("trial %0d: result %0d expected %0d (P=%0d)", trial, result, 8'(exp_res), P);
      end
      if (t) n_term++;
    end
    checks++;
    if (n_term < 20) begin failures++; $display("too few terminations: %0d", n_term); end
    $display("terminated outputs: %0d of 400", n_term);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
