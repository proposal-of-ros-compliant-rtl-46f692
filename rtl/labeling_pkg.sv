// labeling_pkg -- constants and types shared by the line-based image labeling core.
//
// The core labels a binary image one raster line at a time (first pass of connected-
// component labeling, 8-connectivity). Pixels and labels are 8 bits wide and travel
// four to a 32-bit FIFO word. The default image size is full HD, 1920 x 1080.
// Widths, memory depths and the image size follow the published block diagram; the
// byte order inside a 32-bit word (pixel x in bits 8*(x%4)+7 : 8*(x%4)) is this
// design's own choice.
package labeling_pkg;

  localparam int unsigned PIX_W         = 8;    // "New Pixel", 8 bits
  localparam int unsigned LABEL_W       = 8;    // "Output Label", 8 bits
  localparam int unsigned WORD_W        = 32;   // FIFO data width
  localparam int unsigned PIX_PER_WORD  = WORD_W / PIX_W;  // 4
  localparam int unsigned LINE_ADDR_W   = 11;   // pixel / label address width
  localparam int unsigned IMG_WIDTH     = 1920;
  localparam int unsigned IMG_HEIGHT    = 1080;
  localparam int unsigned IMG_WORDS     = 1024; // memory_img depth, 32-bit words
  localparam int unsigned LABEL_DEPTH   = 4096; // label_data depth, 8-bit labels
  localparam int unsigned FIFO_DEPTH    = 512;  // application FIFO depth, words

  typedef logic [PIX_W-1:0]       pixel_t;
  typedef logic [LABEL_W-1:0]     label_t;
  typedef logic [WORD_W-1:0]      word_t;
  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  // memory_img holds two line slots; its addresses are a slot bit above the
  // line-relative address: {slot, word index} / {slot, pixel index}
  typedef logic [$clog2(IMG_WORDS)-1:0]              img_wadr_t;   // 10 bits
  typedef logic [$clog2(IMG_WORDS*PIX_PER_WORD)-1:0] img_radr_t;   // 12 bits

  // Phases of one line, as sequenced by state_controller.
  typedef enum logic [1:0] {
    PH_IDLE   = 2'd0,   // waiting for the first word of a frame
    PH_LOAD   = 2'd1,   // first line of a frame: input FIFO -> memory_img
    PH_LABEL  = 2'd2,   // label a line; meanwhile load the next line and output the previous one
    PH_OUTPUT = 2'd3    // after the last line of a frame: its labels -> output FIFO
  } phase_e;

endpackage
