// sparqle_pkg: constants and types shared by the sub-precision activation
// accelerator.
//
// An Int8 activation x is stored as three parts: LSB4 = x[3:0] (unsigned,
// dense), MSB4 = x[7:4] (signed, kept only where non-zero) and one precision
// bitmap (PBM) bit that is 1 where MSB4 != 0. x = 16*MSB4 + LSB4.
//
// Array sizes (16x16 PEs, 8 Int4xInt4 MACs per PE, 1.5 MB SRAM in 16 banks,
// 16 B column-buffer lines, 32 B/cycle SRAM bandwidth) follow the paper. The
// per-PE register-file split (32 input channels per tile, 8 outputs per PE)
// and the SRAM data layout are this design's own choices; see README.
package sparqle_pkg;

  // ---- array geometry --------------------------------------------------
  localparam int unsigned N_ROWS    = 16;  // PE rows (one token per row)
  localparam int unsigned N_COLS    = 16;  // PE columns
  localparam int unsigned MACS      = 8;   // Int4 x Int4 MACs per PE
  localparam int unsigned KT        = 32;  // input channels per PE tile
  localparam int unsigned OCS       = 8;   // output channels held per PE
  localparam int unsigned NT_CH     = N_COLS * OCS; // output channels per array tile (128)

  // ---- memory ------------------------------------------------------------
  localparam int unsigned LINE_B    = 16;             // bytes per SRAM line
  localparam int unsigned LINE_W    = LINE_B * 8;     // 128 bits
  localparam int unsigned LINE_NIB  = LINE_B * 2;     // 32 nibbles
  localparam int unsigned SRAM_BANKS = 16;
  localparam int unsigned SRAM_BYTES = 1536 * 1024;   // 1.5 MB
  localparam int unsigned SRAM_LINES = SRAM_BYTES / LINE_B;      // 98304
  localparam int unsigned ADDR_W     = $clog2(SRAM_LINES);       // 17
  localparam int unsigned BANK_DEPTH = SRAM_LINES / SRAM_BANKS;  // 6144

  // ---- drain ---------------------------------------------------------------
  localparam int unsigned DRAIN_LANES = 16;  // Int8 outputs per drain beat (16 B)
  localparam int unsigned MAX_CH      = 16384; // channels covered by the column-importance mask

  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Layer descriptor ("schedule descriptor"): one matrix product
  // OUT[M][N] = requant(X[M][K] * W[K][N]) with compressed X and OUT.
  // All bases are SRAM line addresses. Sizes are in elements.
  typedef struct packed {
    logic [15:0] m;          // tokens (>= 1); a partial last tile is allowed
    logic [15:0] k;          // input channels, multiple of 4*KT (128)
    logic [15:0] n;          // output channels, multiple of NT_CH (128)
    addr_t       x_lsb_base; // X LSB4 lines: one per (token, 32-channel group)
    addr_t       x_pbm_base; // X PBM lines: one per (token, 128-channel group)
    addr_t       x_msb_base; // X MSB4 slots: 4 lines per (token, 128-channel group)
    addr_t       w_base;     // W lines: one per (output channel, 32-channel group)
    addr_t       o_lsb_base;
    addr_t       o_pbm_base;
    addr_t       o_msb_base;
    logic [4:0]  shift;      // requantisation: out = sat8(acc >>> shift)
    logic signed [7:0] clip_l;  // clipping lower constant l (<= 0)
    logic signed [7:0] clip_h;  // clipping upper constant h (>= 15)
    logic        a4;         // 1: Int4 activations (one dense round, LSB4 lines only, signed)
  } layer_desc_t;

  // Event and cycle counters of one layer run.
  typedef struct packed {
    logic [31:0] cycles;          // start to done
    logic [31:0] dense_cycles;    // array busy in a dense pass
    logic [31:0] sparse_cycles;   // array busy in a sparse pass
    logic [31:0] load_wait_cycles;// waiting for a dense load (nothing to overlap with)
    logic [31:0] drain_cycles;
    logic [31:0] sparse_row_skips;// PE-row sparse passes skipped (no non-zero MSB4)
    logic [31:0] msb_group_skips; // token groups loaded without any MSB4 line
    logic [31:0] clipped;         // activations changed by the clip
    logic [31:0] saturated;       // accumulators saturated by requantisation
    logic [31:0] bank_conflicts;  // requester-cycles denied by a busy bank
    logic [31:0] drain_stalls;    // drain cycles held by a full buffer or busy bank
    logic [31:0] overlap_cycles;  // sparse load running alongside the dense pass
  } perf_t;

  // Bounds of the range whose MSB4 is zero: [0, 15].
  localparam logic signed [7:0] LP_L = 8'sd0;
  localparam logic signed [7:0] LP_H = 8'sd15;

endpackage
