// mm2im_pkg: types and constants shared by the MM2IM transposed-convolution
// accelerator.
//
// The micro-ISA opcodes are the five one-hot codes of the accelerator's
// instruction set (configure, load bias+filter, load input, schedule, store).
// The layout of the configuration words that follow opcode 0x01, the map
// entry formats and all widths are this design's own choices.
//
// Configuration block (CFG_WORDS 32-bit words after opcode 0x01):
//   word 0 : [15:0] Ih          [31:16] Iw
//   word 1 : [15:0] Ic (multiple of UF)  [23:16] Ks  [31:24] S
//   word 2 : [15:0] Oh          [31:16] Ow
//   word 3 : [7:0] pad_top  [15:8] pad_left  [23:16] input zero point (int8)
//            [31:24] output zero point (int8)
//   word 4 : requantisation multiplier (signed 32 bit)
//   word 5 : [7:0] requantisation right shift (0..62)
package mm2im_pkg;

  // Micro-ISA opcodes (Table I of the MM2IM description).
  typedef enum logic [7:0] {
    OP_CONFIG   = 8'h01,  // configure TCONV, followed by CFG_WORDS words
    OP_LOAD_WGT = 8'h02,  // load bias and filter (weight data loader)
    OP_LOAD_IN  = 8'h04,  // load input rows (dynamic input loader)
    OP_SCHEDULE = 8'h08,  // start a TCONV pass for the loaded filters
    OP_STORE    = 8'h10   // store the next output row (output crossbar)
  } opcode_e;

  localparam int unsigned CFG_WORDS = 6;
  localparam int unsigned AXIS_W    = 32;  // stream data width
  localparam int unsigned BYTES_PER_BEAT = AXIS_W / 8;

  localparam int unsigned DIM_W = 16;  // image dimensions
  localparam int unsigned KS_W  = 8;   // kernel size / stride / padding
  localparam int unsigned COL_W = 8;   // kernel column index kh*Ks+kw
  localparam int unsigned ACC_W = 32;  // accumulator width

  // Layer configuration, loaded by OP_CONFIG.
  typedef struct packed {
    logic [DIM_W-1:0] ih;
    logic [DIM_W-1:0] iw;
    logic [DIM_W-1:0] ic;        // input channels (multiple of UF)
    logic [KS_W-1:0]  ks;
    logic [KS_W-1:0]  stride;
    logic [DIM_W-1:0] oh;
    logic [DIM_W-1:0] ow;
    logic [KS_W-1:0]  pad_top;
    logic [KS_W-1:0]  pad_left;
    logic signed [7:0]  in_zp;
    logic signed [7:0]  out_zp;
    logic signed [31:0] ppu_mult;
    logic [7:0]         ppu_shift;
  } cfg_t;

  // Compute-map entry: which filter column (kernel position) to use with
  // which pixel of the current input row.
  typedef struct packed {
    logic [COL_W-1:0] col;
    logic [DIM_W-1:0] pix;
  } cmap_t;

  // Output-map entry: final output coordinate of the partial result.
  // The linear output index is oh*Ow + ow.
  typedef struct packed {
    logic [DIM_W-1:0] oh;
    logic [DIM_W-1:0] ow;
  } omap_t;

endpackage
