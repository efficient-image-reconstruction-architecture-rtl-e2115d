// recon_pkg: types and constants shared by the atom-image reconstruction
// accelerator.
//
// The accelerator works on a 31x31 window (KSIZE) around every atom site. The
// window size, the 512-bit memory bus and the 32-bit element precision follow
// the published architecture. The 16-bit camera pixel format, the 32-bit
// signed projector coefficients, the Q16.16 output format and the memory
// layouts below are this design's own choices.
//
// Memory layouts (byte addresses, little endian inside a 512-bit beat):
//   grid   : one 32-bit word per atom, {y[31:16], x[15:0]} in pixels
//   kernel : 31 rows, each padded to 32 words (128 bytes), 32-bit signed
//            coefficients, one contiguous 62-beat burst, 64-byte aligned
//   image  : row-major, IMG_W pixels per row, 16-bit unsigned pixels
//   output : one 32-bit signed Q16.16 emission value per atom
package recon_pkg;

  localparam int unsigned KSIZE     = 31;            // window / kernel side
  localparam int unsigned KHALF     = KSIZE / 2;     // 15
  localparam int unsigned AXI_DW    = 512;           // memory bus width
  localparam int unsigned AXI_AW    = 32;            // byte address width
  localparam int unsigned AXI_BYTES = AXI_DW / 8;    // 64
  localparam int unsigned DATA_W    = 32;            // decoded element width
  localparam int unsigned PIX_W     = 16;            // camera pixel in memory
  localparam int unsigned PIX_PER_BEAT  = AXI_DW / PIX_W;   // 32
  localparam int unsigned WORD_PER_BEAT = AXI_DW / DATA_W;  // 16
  localparam int unsigned PROD_W    = 2 * DATA_W;                   // 64
  localparam int unsigned ACC_W     = PROD_W + $clog2(KSIZE * KSIZE); // 74
  localparam int unsigned FRAC_W    = 16;            // fraction bits of emission
  localparam int unsigned COORD_W   = 16;            // pixel coordinates
  localparam int unsigned IDX_W     = 16;            // atom index

  typedef logic signed [DATA_W-1:0] elem_t;   // decoded pixel or projector value
  typedef logic signed [ACC_W-1:0]  acc_t;    // product / matrix sums
  typedef logic [AXI_AW-1:0]        addr_t;

  // One atom's region of interest as found by boundary extraction.
  // (x0, y0) is the image coordinate of window element [0][0]; it may be
  // negative near the image border. The inclusive ranges col_lo..col_hi and
  // row_lo..row_hi are the part of the window inside the image; empty is set
  // when the window does not touch the image at all.
  typedef struct packed {
    logic [IDX_W-1:0]          idx;
    logic signed [COORD_W:0]   x0;
    logic signed [COORD_W:0]   y0;
    logic [COORD_W-1:0]        col_lo;
    logic [COORD_W-1:0]        col_hi;
    logic [COORD_W-1:0]        row_lo;
    logic [COORD_W-1:0]        row_hi;
    logic                      empty;
  } roi_t;

  // Run configuration written by the processing system.
  typedef struct packed {
    addr_t             grid_base;
    addr_t             kern_base;
    addr_t             img_base;
    addr_t             out_base;
    logic [COORD_W-1:0] img_w;
    logic [COORD_W-1:0] img_h;
    logic [IDX_W-1:0]   num_atoms;
  } cfg_t;

  // Read-address request of an internal AXI read master.
  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;   // beats - 1
  } ar_req_t;

endpackage
