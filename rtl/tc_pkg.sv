// Shared constants and types of the tight-compression systolic accelerator.
//
// The accelerator runs a pruned, column-packed CNN weight matrix on a
// weight-stationary, bit-serial systolic array. Array size (32x32), the
// number of packed columns per array column (G = 16), the 8-bit weights and
// activations, the 32-bit partial sums and the four interleaved MAC units per
// node follow the paper. Buffer capacities, the tile descriptor and the
// control word that travels with the data are this design's own choices.
package tc_pkg;

  // ---- array geometry (from the paper) ----
  localparam int ROWS      = 32;  // array rows = output channels of a row section
  localparam int COLS      = 32;  // array columns = packed column groups of a tile
  localparam int SUB_COLS  = 8;   // width of one subarray (four 32x8 subarrays)
  localparam int G         = 16;  // original columns packed into one array column
  localparam int MACS      = 4;   // interleaved MAC units per node
  localparam int ABITS     = 8;   // activation width
  localparam int WBITS     = 8;   // weight magnitude width
  localparam int PSUM_BITS = 32;  // partial-sum width
  localparam int IDX_BITS  = $clog2(G);        // 4-bit node index
  localparam int PH_BITS   = $clog2(PSUM_BITS); // phase inside a 32-cycle frame
  localparam int SLOT_CYC  = ABITS;           // cycles one input vector occupies
  localparam int FILL_COLS = COLS / ABITS;    // columns filled per cycle (4)
  localparam int RD_PORTS  = FILL_COLS * G;   // input-buffer reads per cycle (64)

  // ---- buffer capacities (assumed) ----
  localparam int CH_MAX    = 512; // input channels held by the input buffer
  localparam int PIX_MAX   = 8;   // pixel positions held by the input buffer
  localparam int WB_TILES  = 16;  // weight tiles held by the weight buffer
  localparam int OB_SLOTS  = 16;  // row-section slots in the output buffer

  localparam int CH_BITS   = $clog2(CH_MAX);
  localparam int PIX_BITS  = $clog2(PIX_MAX);
  localparam int TILE_BITS = $clog2(WB_TILES);
  localparam int SLOT_BITS = $clog2(OB_SLOTS);

  // Subword bit-length split, the 2-bit 'mod' of the subword MAC.
  typedef enum logic [1:0] {
    MOD_H5_L3 = 2'b00,
    MOD_H4_L4 = 2'b01,
    MOD_H3_L5 = 2'b11
  } sw_mode_e;

  // Content of one node: weight field, signs and the two 4-bit indices.
  // Weight-level MAC uses w as magnitude, sign_l as sign and idx_h as index.
  typedef struct packed {
    logic [WBITS-1:0]    w;      // {Subword H, Subword L} or full magnitude
    logic                sign_l; // sign of Subword L (of the whole product)
    logic                opp;    // sign of Subword H is opposite to sign_l
    logic [IDX_BITS-1:0] idx_h;  // selects x_i among the G input bits
    logic [IDX_BITS-1:0] idx_l;  // selects x_j among the G input bits
  } node_wt_t;

  // Control word that travels up each column with the input bits.
  typedef struct packed {
    logic                vld;   // the current 8-cycle slot carries a vector
    logic [PIX_BITS-1:0] pix;   // pixel index of that vector
    logic [PH_BITS-1:0]  phase; // position in the 32-cycle frame
  } ctl_t;

  // One address-LUT entry.
  typedef struct packed {
    logic               vld;
    logic [CH_BITS-1:0] ch;
  } lut_entry_t;

  // Per-tile descriptor kept beside the weights.
  typedef struct packed {
    logic [1:0]           split;   // 0: one group, k: group B starts at column 8k
    logic [SLOT_BITS-1:0] sec_a;   // output-buffer slot of group A
    logic                 first_a; // first tile of that row section: start from 0
    logic [SLOT_BITS-1:0] sec_b;
    logic                 first_b;
  } tile_desc_t;

  // MAC m starts its 32-bit word when phase == m*SLOT_CYC.
  function automatic logic [PH_BITS-1:0] word_bit(input logic [PH_BITS-1:0] phase,
                                                  input int m);
    return phase - PH_BITS'(m * SLOT_CYC);
  endfunction

endpackage
