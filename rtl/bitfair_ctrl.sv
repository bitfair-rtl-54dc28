// bitfair_ctrl: FSM controller of the BitFair accelerator.
//
// For every layer of the run it latches the layer descriptor, then walks the
// published compute flow
//     for oh                      (one output row at a time)
//       for oc0 += 16             (16 output channels = 16 PE rows)
//         for ow0 += 16           (16 output columns = 16 PE columns)
//           for j < nbits         (bit-plane slot; plane = omega(j))
//             for kh, kw, ic      (one MAC per cycle in every PE)
// Each (oh, oc0, ow0) is a tile of up to 16x16 outputs held in the PEs. A tile
// starts with two cycles that clear the PEs and read the 16-bit bias of each
// filter row from its weight bank; then one MAC per cycle is issued: the
// activation vector (row oh+kh, pixels ow0+kw ..) and the weight address, with
// omega(j) as shift amount and the plane_end/last_plane tags. As soon as every
// active PE has terminated (all_done), the remaining bit planes of the tile
// are skipped. After the last plane, the outputs are latched into the PEs'
// output registers and a write-back engine stores them, one PE row per cycle
// (16 cycles), into the other activation SRAM (and the output buffer) while
// the next tile already computes. If a tile finishes while the previous
// write-back is still busy, the controller stalls. A layer ends when its
// write-back has drained; the next layer then reads what this one wrote.
//
// Follows the published controller: per-layer loading of omega, theta and
// dimensions, nested loops with an extra bit-position loop, broadcast of the
// bit select / shift amount, collection of early-termination flags to skip
// work, write-back of completed outputs and stalling. The state encoding, the
// bias prologue, the tile order and the overlap of write-back with compute
// are this implementation's choices.
//
// Timing: SRAMs answer one cycle after a request, so all operand tags
// (d_mac, d_plane_end, d_last_plane, d_shamt, d_bias_lo, d_bias_hi) are
// delayed by one register to meet the data at the array.
module bitfair_ctrl
  import bitfair_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [3:0]         n_layers,
  input  layer_cfg_t         cfg_in,       // descriptor of layer_idx
  output logic [2:0]         layer_idx,
  output logic               busy,
  output logic               done,         // one-cycle pulse at the end of a run
  output layer_cfg_t         cfg,          // latched descriptor of the running layer
  // array control
  input  logic               all_done,
  output logic [PE_ROWS-1:0] row_active,
  output logic [PE_COLS-1:0] col_active,
  output logic               clear,
  output logic               latch,
  output logic               d_mac,
  output logic               d_plane_end,
  output logic               d_last_plane,
  output bitpos_t            d_shamt,
  output logic               d_bias_lo,
  output logic               d_bias_hi,
  // source activation SRAM read
  output logic               act_rd_en,
  output logic [ACT_AW-1:0]  act_row_base,
  output logic [8:0]         act_xoff,
  // weight SRAM read
  output logic               mac_re,       // per-row read request (gated by termination control)
  output logic               bias_re,      // bias read (all rows, not gated)
  output logic [WGT_AW-1:0]  wgt_word,
  // write-back
  output logic               wb_en,
  output logic [3:0]         wb_row,
  output logic [ACT_AW-1:0]  wb_act_word,
  output logic [OBUF_AW-1:0] wb_obuf_word,
  output logic [PE_COLS-1:0] wb_mask,
  output logic               wb_obuf_en,
  output logic               wb_dst_sel,
  output perf_evt_t          evt
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_PREP, S_TINIT, S_TBIAS, S_COMP, S_DRAIN, S_LATCH, S_NEXT, S_LWAIT
  } state_e;
  state_e state;

  // derived layer sizes
  logic [7:0]  oh_n, ow_n;
  logic [3:0]  owb, iwb;            // words per row (ceil(W/16))
  logic [15:0] grp_stride;          // KH*KW*ICH + 2 bias bytes
  // tile position
  logic [7:0]  oh, oc0, ow0;
  logic [WGT_AW-1:0] grp_base;
  // inner loop
  logic [2:0]  j;
  logic [3:0]  kh_c, kw_c;
  logic [7:0]  ic_c;
  logic [WGT_AW-1:0] wptr;

  wire ic_last    = (ic_c == cfg.ich - 8'd1);
  wire kw_last    = (kw_c == cfg.kw - 4'd1);
  wire kh_last    = (kh_c == cfg.kh - 4'd1);
  wire plane_end  = ic_last && kw_last && kh_last;
  wire last_plane = (j == cfg.nbits - 3'd1);
  wire issue      = (state == S_COMP) && !all_done;

  // write-back engine state
  logic        wb_busy;
  logic [7:0]  wb_oc0, wb_oh, wb_ow0;
  logic [PE_COLS-1:0] wb_cmask;

  assign busy = (state != S_IDLE);

  // ---- tile activity masks ----
  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) row_active[r] = (9'(oc0) + 9'(r)) < 9'(cfg.och);
    for (int c = 0; c < PE_COLS; c++) col_active[c] = (9'(ow0) + 9'(c)) < 9'(ow_n);
  end

  // ---- issue-stage outputs ----
  always_comb begin
    clear        = (state == S_TINIT);
    bias_re      = (state == S_TINIT) || (state == S_TBIAS);
    mac_re       = issue;
    act_rd_en    = issue;
    wgt_word     = (state == S_TINIT) ? grp_base :
                   (state == S_TBIAS) ? grp_base + WGT_AW'(1) : wptr;
    act_row_base = cfg.in_base + ACT_AW'((16'(ic_c) * 16'(cfg.ih) + 16'(oh) + 16'(kh_c)) * 16'(iwb));
    act_xoff     = 9'(ow0) + 9'(kw_c);
    latch        = (state == S_LATCH) && !wb_busy;
  end

  // ---- operand tags, one cycle behind the requests ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_mac <= 1'b0; d_plane_end <= 1'b0; d_last_plane <= 1'b0; d_shamt <= '0;
      d_bias_lo <= 1'b0; d_bias_hi <= 1'b0;
    end else begin
      d_mac        <= issue;
      d_plane_end  <= plane_end;
      d_last_plane <= last_plane;
      d_shamt      <= cfg.order[j];
      d_bias_lo    <= (state == S_TINIT);
      d_bias_hi    <= (state == S_TBIAS);
    end
  end

  // ---- main FSM ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; layer_idx <= '0; cfg <= '0;
      oh_n <= '0; ow_n <= '0; owb <= '0; iwb <= '0; grp_stride <= '0;
      oh <= '0; oc0 <= '0; ow0 <= '0; grp_base <= '0;
      j <= '0; kh_c <= '0; kw_c <= '0; ic_c <= '0; wptr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          layer_idx <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: begin
          cfg   <= cfg_in;
          state <= S_PREP;
        end
        S_PREP: begin
          oh_n       <= cfg.ih - 8'(cfg.kh) + 8'd1;
          ow_n       <= cfg.iw - 8'(cfg.kw) + 8'd1;
          owb        <= 4'((9'(cfg.iw) - 9'(cfg.kw) + 9'd16) >> 4);
          iwb        <= 4'((9'(cfg.iw) + 9'd15) >> 4);
          grp_stride <= 16'(cfg.kh) * 16'(cfg.kw) * 16'(cfg.ich) + 16'd2;
          oh <= '0; oc0 <= '0; ow0 <= '0;
          grp_base <= cfg.w_base;
          state <= S_TINIT;
        end
        S_TINIT: state <= S_TBIAS;
        S_TBIAS: begin
          j <= '0; kh_c <= '0; kw_c <= '0; ic_c <= '0;
          wptr  <= grp_base + WGT_AW'(2);
          state <= S_COMP;
        end
        S_COMP: begin
          if (all_done) begin
            state <= S_DRAIN;
          end else if (plane_end) begin
            if (last_plane) state <= S_DRAIN;
            j <= j + 3'd1; kh_c <= '0; kw_c <= '0; ic_c <= '0;
            wptr <= grp_base + WGT_AW'(2);
          end else begin
            wptr <= wptr + WGT_AW'(1);
            if (!ic_last) ic_c <= ic_c + 8'd1;
            else begin
              ic_c <= '0;
              if (!kw_last) kw_c <= kw_c + 4'd1;
              else begin kw_c <= '0; kh_c <= kh_c + 4'd1; end
            end
          end
        end
        S_DRAIN: state <= S_LATCH;
        S_LATCH: if (!wb_busy) state <= S_NEXT;
        S_NEXT: begin
          if (9'(ow0) + 9'd16 < 9'(ow_n)) begin
            ow0 <= ow0 + 8'd16; state <= S_TINIT;
          end else if (9'(oc0) + 9'd16 < 9'(cfg.och)) begin
            ow0 <= '0; oc0 <= oc0 + 8'd16;
            grp_base <= grp_base + WGT_AW'(grp_stride); state <= S_TINIT;
          end else if (oh + 8'd1 < oh_n) begin
            ow0 <= '0; oc0 <= '0; oh <= oh + 8'd1;
            grp_base <= cfg.w_base; state <= S_TINIT;
          end else begin
            state <= S_LWAIT;
          end
        end
        S_LWAIT: if (!wb_busy) begin
          if (4'(layer_idx) + 4'd1 < n_layers) begin
            layer_idx <= layer_idx + 3'd1; state <= S_LOAD;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_LWAIT) && !wb_busy && !(4'(layer_idx) + 4'd1 < n_layers);

  // ---- write-back engine: one PE row per cycle ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_busy <= 1'b0; wb_row <= '0; wb_oc0 <= '0; wb_oh <= '0; wb_ow0 <= '0; wb_cmask <= '0;
    end else if (latch) begin
      wb_busy <= 1'b1; wb_row <= '0; wb_oc0 <= oc0; wb_oh <= oh; wb_ow0 <= ow0;
      wb_cmask <= col_active;
    end else if (wb_busy) begin
      wb_row <= wb_row + 4'd1;
      if (wb_row == 4'(PE_ROWS - 1)) wb_busy <= 1'b0;
    end
  end

  logic [15:0] wb_lin;   // (oc*OH + oh)*OWB + ow0/16
  always_comb begin
    wb_lin       = ((16'(wb_oc0) + 16'(wb_row)) * 16'(oh_n) + 16'(wb_oh)) * 16'(owb) + 16'(wb_ow0 >> 4);
    wb_en        = wb_busy && ((9'(wb_oc0) + 9'(wb_row)) < 9'(cfg.och));
    wb_act_word  = cfg.out_base + ACT_AW'(wb_lin);
    wb_obuf_word = OBUF_AW'(wb_lin);
    wb_mask      = wb_cmask;
    wb_obuf_en   = cfg.obuf_en;
    wb_dst_sel   = !cfg.src_sel;
  end

  // ---- events ----
  always_comb begin
    evt.mac_cycle  = issue;
    evt.tile_done  = latch;
    evt.tile_early = (state == S_COMP) && all_done;
    evt.stall      = (state == S_LATCH) && wb_busy;
    evt.layer_done = (state == S_LWAIT) && !wb_busy;
  end

  a_no_issue_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE) |-> !act_rd_en && !mac_re && !wb_en);
endmodule
