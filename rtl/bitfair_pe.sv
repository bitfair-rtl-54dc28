// bitfair_pe: one bit-serial processing element with early termination.
//
// Each cycle with mac_en the PE multiplies its 8-bit two's-complement
// activation by one weight bit (an AND), applies the weight's sign (negation
// when the sign bit is set), shifts the product left by the bit significance
// omega(j) and adds it into a 16-bit accumulator. The accumulator therefore
// holds the bias-free partial sum P_k of the bit planes processed so far.
// On the last MAC of a bit plane (plane_end) that is not the final plane, the
// comparator checks P_k <= theta; if true, the PE raises term and ignores all
// further MACs of this output (the register enables stand for clock gating).
// On latch the output register takes zero if the PE terminated, otherwise
// ReLU(P_K + o_prev) shifted right by out_shift and clamped to 8 bits.
//
// Follows the published PE: AND partial product, sign logic, barrel shifter
// by omega(j), accumulator with feedback, COMP against theta, zero/ReLU mux.
// Own choices: the O_prev input carries the per-channel bias and is added
// only when the output is formed, so that theta is compared with the
// bias-free partial sum as the algorithm defines; the accumulator saturates
// instead of wrapping; the 8-bit requantisation (shift + clamp) and the
// non-ReLU mode (relu_en = 0, no termination, signed clamp) are added so the
// PE can feed the next layer and a final classifier layer.
//
// Timing: acc and term update at the clock edge that ends a mac_en cycle;
// result updates at the edge that ends a latch cycle. clear resets acc and
// term for a new output and has priority over mac_en.
module bitfair_pe
  import bitfair_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        active,      // PE holds a valid output in the current tile
  input  logic        clear,       // start a new output
  input  logic        mac_en,      // operand valid this cycle
  input  logic        plane_end,   // this MAC closes the current bit plane
  input  logic        last_plane,  // current bit plane is the final one
  input  act_t        act,         // activation I
  input  logic        wbit,        // weight bit W at position omega(j)
  input  logic        wsign,       // weight sign bit (1 = negative)
  input  bitpos_t     shamt,       // omega(j)
  input  psum_t       theta,       // layer threshold
  input  logic        relu_en,     // ReLU layer: early termination enabled
  input  logic        latch,       // form the output
  input  psum_t       o_prev,      // per-output-channel bias
  input  logic [3:0]  out_shift,
  output logic        term,        // Terminate
  output logic [7:0]  result,      // 8-bit output activation
  output logic        sat_evt      // accumulator saturated this cycle
);

  psum_t acc;
  logic signed [PSUM_W:0] prod, sum_w;
  psum_t acc_next;
  logic  do_mac;

  function automatic psum_t sat16(input logic signed [PSUM_W:0] v);
    if (v > 17'sd32767)       return 16'sh7fff;
    else if (v < -17'sd32768) return 16'sh8000;
    else                      return v[PSUM_W-1:0];
  endfunction

  always_comb begin
    // AND gate + sign handling + barrel shifter
    prod = wbit ? {{(PSUM_W+1-ACT_W){act[ACT_W-1]}}, act} : '0;
    if (wsign) prod = -prod;
    prod = prod <<< shamt;
    sum_w    = {acc[PSUM_W-1], acc} + prod;
    acc_next = sat16(sum_w);
    do_mac   = mac_en && active && !term;
  end

  assign sat_evt = do_mac && (sum_w != {acc_next[PSUM_W-1], acc_next});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      term <= 1'b0;
    end else if (clear) begin
      acc  <= '0;
      term <= 1'b0;
    end else if (do_mac) begin
      acc <= acc_next;
      if (plane_end && !last_plane && relu_en && (acc_next <= theta))
        term <= 1'b1;
    end
  end

  // Output stage: bias add, ReLU, zero mux, requantisation.
  logic signed [PSUM_W:0] biased_w;
  psum_t biased, shifted;
  logic [7:0] res_next;
  always_comb begin
    biased_w = {acc[PSUM_W-1], acc} + {o_prev[PSUM_W-1], o_prev};
    biased   = sat16(biased_w);
    shifted  = biased >>> out_shift;
    if (relu_en) begin
      if (term || shifted <= 0)      res_next = 8'd0;
      else if (shifted > 16'sd127)   res_next = 8'd127;
      else                           res_next = shifted[7:0];
    end else begin
      if (shifted > 16'sd127)        res_next = 8'd127;
      else if (shifted < -16'sd128)  res_next = 8'h80;
      else                           res_next = shifted[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     result <= '0;
    else if (latch) result <= res_next;
  end

endmodule
