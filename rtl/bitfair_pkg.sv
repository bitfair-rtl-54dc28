// bitfair_pkg: constants and types shared by the BitFair accelerator.
//
// The array size (16x16), the operand formats (8-bit two's-complement
// activations, 8-bit sign-magnitude weights with 7 magnitude bits, 16-bit
// two's-complement partial sums) follow the published design. The layer
// configuration record, the host address map and the memory geometry are this
// implementation's own choices; they are documented next to each field.
package bitfair_pkg;

  // ---- array and operand formats (published numbers) ----
  localparam int unsigned PE_ROWS  = 16;  // output channels per tile (filter rows)
  localparam int unsigned PE_COLS  = 16;  // output x positions per tile (columns)
  localparam int unsigned ACT_W    = 8;   // activation width, two's complement
  localparam int unsigned W_BITS   = 8;   // weight width, sign + 7 magnitude bits
  localparam int unsigned MAG_BITS = W_BITS - 1;
  localparam int unsigned PSUM_W   = 16;  // partial-sum width, two's complement

  // ---- memory geometry (32 KB + 32 KB activation, 2 x 16 KB weight, 8 KB output) ----
  localparam int unsigned BANKS          = 16;
  localparam int unsigned ACT_BANK_DEPTH = 2048;  // 16 x 2 KB = 32 KB per activation SRAM
  localparam int unsigned WGT_BANK_DEPTH = 2048;  // 16 x 2 KB = 32 KB of weights
  localparam int unsigned OBUF_BANK_DEPTH = 512;  // 16 x 512 B = 8 KB output buffer
  localparam int unsigned ACT_AW  = $clog2(ACT_BANK_DEPTH);
  localparam int unsigned WGT_AW  = $clog2(WGT_BANK_DEPTH);
  localparam int unsigned OBUF_AW = $clog2(OBUF_BANK_DEPTH);

  localparam int unsigned MAX_LAYERS = 8;  // layer-table slots in the CSR block

  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic [2:0]               bitpos_t;  // magnitude-bit position 0..6

  // Per-layer configuration, loaded by the controller at the start of a layer.
  // Convolution is stride 1 without padding: OH = IH-KH+1, OW = IW-KW+1.
  typedef struct packed {
    logic [7:0]       ich;        // input channels, 1..255
    logic [7:0]       och;        // output channels, 1..255
    logic [7:0]       ih;         // input height
    logic [7:0]       iw;         // input width
    logic [3:0]       kh;         // kernel height, 1..15
    logic [3:0]       kw;         // kernel width, 1..15
    logic [2:0]       nbits;      // magnitude bit planes processed, 1..7
    logic             relu_en;    // ReLU layer: early termination allowed
    logic             src_sel;    // activation SRAM read (0: A, 1: B); the other one is written
    logic             obuf_en;    // also copy outputs into the output buffer
    logic [3:0]       out_shift;  // requantisation right shift of the 16-bit result
    bitpos_t [MAG_BITS-1:0] order; // order[j] = omega(j), bit position processed in slot j
    psum_t            theta;      // early-termination threshold on the bias-free partial sum
    logic [ACT_AW-1:0] in_base;   // word base of the input feature map (per bank)
    logic [ACT_AW-1:0] out_base;  // word base of the output feature map (per bank)
    logic [WGT_AW-1:0] w_base;    // word base of this layer's weights (per bank)
  } layer_cfg_t;

  // Performance/event strobes reported by the controller to the CSR counters.
  typedef struct packed {
    logic mac_cycle;     // one bit-serial MAC cycle issued to the array
    logic tile_done;     // one output tile finished
    logic tile_early;    // a tile left its bit-plane loop early (all PEs terminated)
    logic stall;         // compute stalled waiting for the write-back path
    logic layer_done;    // one layer finished
  } perf_evt_t;

  // Host register/memory bus (between the AXI4-Lite slave and the core).
  localparam int unsigned HADDR_W = 20;
  // addr[19:18]: 0 = CSR, 1 = activation SRAMs, 2 = weight SRAM, 3 = output buffer
  // addr[17:2] : byte index inside the region (one byte per 32-bit access)
  typedef enum logic [1:0] {REG_CSR = 2'd0, REG_ACT = 2'd1, REG_WGT = 2'd2, REG_OBUF = 2'd3} region_e;

  // CSR word offsets (addr[11:2])
  localparam logic [9:0] CSR_CTRL     = 10'h000;  // W: bit0 start
  localparam logic [9:0] CSR_STATUS   = 10'h001;  // R: bit0 busy, bit1 done
  localparam logic [9:0] CSR_NLAYERS  = 10'h002;  // RW: number of layers to run, 1..MAX_LAYERS
  localparam logic [9:0] CSR_CYCLES   = 10'h004;  // R: cycles while busy
  localparam logic [9:0] CSR_MACS     = 10'h005;  // R: bit-serial MAC cycles
  localparam logic [9:0] CSR_TILES    = 10'h006;  // R: tiles finished
  localparam logic [9:0] CSR_EARLY    = 10'h007;  // R: tiles ended early
  localparam logic [9:0] CSR_STALLS   = 10'h008;  // R: stall cycles
  localparam logic [9:0] CSR_WSKIP    = 10'h009;  // R: suppressed weight-bank reads
  localparam logic [9:0] CSR_TERMS    = 10'h00A;  // R: outputs terminated early
  // layer slot l occupies words 10'h040 + 8*l + {0..5}
  localparam logic [9:0] CSR_LAYER0   = 10'h040;

endpackage
