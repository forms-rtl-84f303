// forms_pkg: constants and types shared by the fine-grained polarized ReRAM
// accelerator RTL. The sizes follow the main configuration of the design:
// 128x128 crossbars of 2-bit cells, fragments (sub-array columns) of 8 rows,
// four 4-bit ADCs per crossbar each serving 32 columns, 16-bit activations,
// 8-bit weight magnitudes held in four 2-bit cells with one sign per fragment.
// Accumulator and output widths are this design's own choices.
package forms_pkg;
  localparam int IN_BITS   = 16;   // activation width
  localparam int XB_ROWS   = 128;  // crossbar rows
  localparam int XB_COLS   = 128;  // crossbar columns
  localparam int CELL_BITS = 2;    // bits per ReRAM cell
  localparam int W_BITS    = 8;    // weight magnitude bits
  localparam int CELLS     = W_BITS / CELL_BITS;   // cells per weight (4)
  localparam int FRAG      = 8;    // fragment size (rows of a sub-array)
  localparam int NSUB      = XB_ROWS / FRAG;       // sub-array rows (16)
  localparam int NADC      = 4;    // ADCs per crossbar
  localparam int ADC_BITS  = 4;    // ADC resolution
  localparam int NCOL_ADC  = XB_COLS / NADC;       // columns per ADC (32)
  localparam int NWCOL     = XB_COLS / CELLS;      // weight columns per crossbar (32)
  localparam int CUR_W     = $clog2(FRAG * ((1 << CELL_BITS) - 1) + 1); // column level sum (5)
  localparam int ACC_W     = 25;   // per-column sum: 16*15*(2^16-1) needs 25 bits signed
  localparam int OUT_W     = 40;   // shift-and-add output: room for groups of up to 400 crossbars
  localparam int NXB_MCU   = 8;    // crossbars per MCU
  localparam int NMCU      = 12;   // MCUs per tile
  localparam int EDRAM_BYTES = 128 * 1024;
  localparam int ROW_BITS  = 512;  // eDRAM / bus width
  localparam int WORDS_ROW = ROW_BITS / IN_BITS;   // 16-bit words per eDRAM row (32)

  // Layer configuration of one tile operation.
  typedef struct packed {
    logic [15:0] in_base;    // eDRAM row of input segment 0 (4 rows per segment)
    logic [15:0] out_base;   // eDRAM word address of the first output
    logic [7:0]  group;      // crossbars summed into one output column (G)
    logic [7:0]  n_xb;       // crossbars in use (multiple of G)
    logic [4:0]  shamt;      // requantisation right shift
    logic        skip_en;    // zero skipping on
    logic        pool_en;    // 2x2 max pooling of the outputs (4 consecutive words)
  } layer_cfg_t;
endpackage
