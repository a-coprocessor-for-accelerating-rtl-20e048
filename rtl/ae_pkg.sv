// ae_pkg: types and constants shared by the AddressEngine coprocessor.
//
// A pixel is 64 bits: 8-bit Y, U and V plus 16-bit Alfa and Aux channels.
// In the board memory and in the intermediate memories it is split into a
// lower 32-bit word holding Y,U,V and an upper word holding Alfa,Aux, so the
// two halves can live in two 32-bit banks and be read in the same cycle.
// The 64-bit pixel and its 16-line strips follow the paper; the order of the
// channels inside each 32-bit word and the encodings below are this design's
// own choices.
package ae_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PIX_W      = 64;   // bits per pixel
  localparam int unsigned WORD_W     = 32;   // ZBT / PCI word width
  localparam int unsigned N_ZBT      = 6;    // independent ZBT banks
  localparam int unsigned ZBT_AW     = 18;   // 1 MB per bank = 2^18 words
  localparam int unsigned STRIP_LINES = 16;  // lines per strip and per IIM/OIM
  localparam int unsigned IMG2_BASE  = 32'h2_0000; // second input image in a block

  // Bank numbers of the memory map (Fig. 3 order).
  localparam int unsigned BANK_A_LO  = 0;  // block_A, Y U V
  localparam int unsigned BANK_A_HI  = 1;  // block_A, Alfa Aux
  localparam int unsigned BANK_B_LO  = 2;  // block_B, Y U V
  localparam int unsigned BANK_B_HI  = 3;  // block_B, Alfa Aux
  localparam int unsigned BANK_RES_A = 4;  // Res_Block_A
  localparam int unsigned BANK_RES_B = 5;  // Res_Block_B

  // ---------------------------------------------------------------- pixel
  typedef struct packed {
    logic [15:0] alfa;
    logic [15:0] aux;
    logic [7:0]  y;
    logic [7:0]  u;
    logic [7:0]  v;
    logic [7:0]  pad;
  } pixel_t;

  function automatic logic [31:0] pix_lo(pixel_t p);
    return p[31:0];
  endfunction
  function automatic logic [31:0] pix_hi(pixel_t p);
    return p[63:32];
  endfunction

  // ---------------------------------------------------------------- config
  typedef enum logic {
    MODE_INTRA = 1'b0,   // one input image, neighbourhood of the same image
    MODE_INTER = 1'b1    // two input images, same pixel position in both
  } addr_mode_e;

  typedef enum logic [1:0] {
    CON_0   = 2'd0,      // the pixel alone
    CON_8   = 2'd1,      // the pixel and its 8 neighbours (3x3)
    LINE_H9 = 2'd2,      // 9 pixels of the image row, horizontal
    LINE_V9 = 2'd3       // 9 pixels of the image column, vertical
  } nbh_e;

  typedef enum logic [2:0] {
    OP_COPY   = 3'd0,    // centre pixel (A)
    OP_ADD    = 3'd1,    // inter: saturated A+B
    OP_SUB    = 3'd2,    // inter: |A-B| (difference picture, SAD)
    OP_MULT   = 3'd3,    // inter: (A*B)>>8
    OP_GRAD   = 3'd4,    // intra: morphological gradient max-min
    OP_DILATE = 3'd5,    // intra: maximum over the window
    OP_ERODE  = 3'd6,    // intra: minimum over the window
    OP_SMOOTH = 3'd7     // intra: low-pass filter, weights sum to 16
  } pix_op_e;

  // Scan direction. A horizontal scan reads the image line by line, left to
  // right, in strips of 16 lines; a vertical scan reads it column by column,
  // top to bottom, in strips of 16 columns. Everything behind the input
  // transmission unit sees a "line" as one scan line (an image column in a
  // vertical scan), and results leave in scan order.
  typedef enum logic {
    SCAN_H = 1'b0,
    SCAN_V = 1'b1
  } scan_e;

  typedef struct packed {
    scan_e       scan;
    addr_mode_e  mode;
    nbh_e        nbh;
    pix_op_e     op;
    logic [2:0]  chan;     // channels the op applies to: {V,U,Y}; others copy A
    logic [9:0]  width;    // pixels per line
    logic [9:0]  height;   // lines; the scan-line count is a multiple of 16
  } ae_cfg_t;

  // pixels per scan line and scan lines per image
  function automatic logic [9:0] scan_len(ae_cfg_t c);
    return (c.scan == SCAN_V) ? c.height : c.width;
  endfunction
  function automatic logic [9:0] scan_lines(ae_cfg_t c);
    return (c.scan == SCAN_V) ? c.width : c.height;
  endfunction

  // Neighbourhood as held by the matrix register: a 3x3 window of image A,
  // a 9-pixel line window of image A and the centre pixel of image B.
  typedef struct packed {
    pixel_t [2:0][2:0] a;  // a[row][col], row 0 = line y-1, col 0 = x-1
    pixel_t [8:0]      l;  // l[i] = pixel at offset i-4 along the line window
    pixel_t            b;
  } nbh_t;

  // ------------------------------------------------- pixel level controller
  // Control signals from the pixel level controller to the process unit.
  typedef struct packed {
    logic s1_issue;      // stage 1: start a pixel-cycle, read first column
    logic s2_step;       // stage 2: shift the preload column into the matrix
    logic s2_rd_next;    // stage 2: LOAD continues, read the next column
    logic s3_exec;       // stage 3: run the pixel operation into the result reg
    logic s4_store;      // stage 4: push the result register into the OIM
  } pu_ctrl_t;

  // Interrupt status bits.
  localparam int unsigned IRQ_BLK_A_FREE = 0;
  localparam int unsigned IRQ_BLK_B_FREE = 1;
  localparam int unsigned IRQ_RES_A_RDY  = 2;
  localparam int unsigned IRQ_DONE       = 3;

endpackage
