// smartpix_pkg: types and constants shared by the SMARTPIX back-end pipeline.
// The Medipix3RX chip is 256 x 256 pixels; the front-end link carries 256-bit
// words made of eight 32-bit slots. Pixel modes follow the chip's counter
// depths (1, 6, 12 and 24 bits); 6- and 12-bit pixels are widened to 8 and 16
// bits for byte alignment. Rotation angles, accumulation modes and RASHPA
// dispatch rules are enumerated here. The encodings are this design's choice.
package smartpix_pkg;

  localparam int unsigned CHIP_DIM   = 256;   // pixels per chip row and column
  localparam int unsigned BUS_W      = 256;   // link / rotation stream width
  localparam int unsigned WIDE_W     = 512;   // acc24 / spectro stream width
  localparam int unsigned SLOT_W     = 32;    // interleaving slot on the link
  localparam int unsigned MAX_CHIPS  = 8;
  localparam int unsigned ADDR_W     = 64;    // DDR / host byte address

  typedef enum logic [1:0] {
    PIX_1  = 2'd0,   // 1-bit greyscale, kept packed
    PIX_6  = 2'd1,   // 6-bit counter, widened to 8 bits
    PIX_12 = 2'd2,   // 12-bit counter, widened to 16 bits
    PIX_24 = 2'd3    // two 12-bit counters sent as two frames, joined by acc24
  } pix_mode_e;

  typedef enum logic [1:0] {
    ROT_0   = 2'd0,
    ROT_90  = 2'd1,
    ROT_180 = 2'd2,
    ROT_270 = 2'd3
  } angle_e;

  typedef enum logic [1:0] {
    ACC_OFF   = 2'd0,  // acc24 bypassed
    ACC_SUM   = 2'd1,  // accumulate n frames
    ACC_SHIFT = 2'd2   // 24-bit mode: join low and high counter frames
  } acc_mode_e;

  typedef enum logic [1:0] {
    DISP_OVERWRITE   = 2'd0,
    DISP_CONCATENATE = 2'd1,
    DISP_CIRCULAR    = 2'd2
  } dispatch_e;

  // Number of chips under acquisition, 1, 4 or 8, as a 4-bit count.
  typedef logic [3:0] nchips_t;

  // One write beat towards DDR (through the AXI interconnect).
  typedef struct packed {
    logic [ADDR_W-1:0]   addr;   // byte address; lane b is byte (addr & ~63) + b
    logic [WIDE_W-1:0]   data;
    logic [WIDE_W/8-1:0] strb;   // byte enables
  } ddr_wr_t;

  // One transfer for an AXI CDMA: copy len bytes from src to dst.
  typedef struct packed {
    logic [ADDR_W-1:0] src;
    logic [ADDR_W-1:0] dst;
    logic [31:0]       len;
  } cdma_desc_t;

  // RASHPA transfer rules (source, destination and dispatching).
  typedef struct packed {
    logic [ADDR_W-1:0] src_addr;
    logic [31:0]       src_line_size;     // bytes per line
    logic [31:0]       src_line_stride;
    logic [15:0]       src_line_count;    // lines per block
    logic [31:0]       src_block_stride;
    logic [15:0]       src_block_count;   // blocks per trigger
    logic [7:0]        dst_index;         // first local buffer in the RASHPA buffer
    logic [31:0]       dst_offset;        // bytes from the local buffer base
    logic [31:0]       dst_line_stride;
    logic [31:0]       dst_block_stride;
    logic [7:0]        nb_lb_in_rb;       // local buffers in the RASHPA buffer
    logic [15:0]       nb_blocks_in_lb;
    logic [15:0]       nb_blocks_in_group;
    dispatch_e         dispatch;
  } rashpa_cfg_t;

  // Run-time configuration of one diu_sequence (set by the controller).
  typedef struct packed {
    nchips_t                 nchips;        // 1, 4 or 8
    pix_mode_e               pix;
    angle_e [MAX_CHIPS-1:0]  angle;         // rotation per chip
    acc_mode_e               acc_mode;
    logic [15:0]             acc_nframes;
    logic                    spectro_en;
    logic [ADDR_W-1:0]       ddr_start;
    logic [31:0]             ddr_line_size;
    logic [31:0]             ddr_line_stride;
    logic [31:0]             ddr_block_stride;
  } diu_cfg_t;

endpackage
