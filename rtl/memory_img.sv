// memory_img -- one line of the input image.
//
// Written a 32-bit FIFO word at a time (four 8-bit pixels, pixel x in byte x%4) and
// read one 8-bit pixel at a time, so the labeling side can take a pixel per clock.
// Depth 1024 words (4096 pixels) as in the block diagram ("32bit x 1024"). The
// controllers use it as two line slots of 512 words / 2048 pixels (address MSB =
// slot), so one line is labeled while the next is written; a 1920-pixel line needs
// 480 words. Both ports are synchronous: rdata is the pixel at the r_adr presented on
// the previous clock edge where re was high. Written as a word array with a
// registered byte select, which maps onto an asymmetric block RAM.
module memory_img
  import labeling_pkg::*;
#(
  parameter int unsigned WORDS = IMG_WORDS
) (
  input  logic                                     clk,
  input  logic                                     we,
  input  logic [$clog2(WORDS)-1:0]                 w_adr,  // word address
  input  word_t                                    wdata,
  input  logic                                     re,
  input  logic [$clog2(WORDS*PIX_PER_WORD)-1:0]    r_adr,  // pixel address
  output pixel_t                                   rdata
);

  localparam int unsigned SEL_W = $clog2(PIX_PER_WORD);

  word_t mem [WORDS];
  word_t word_q;
  logic [SEL_W-1:0] sel_q;

  always_ff @(posedge clk) begin
    if (we) mem[w_adr] <= wdata;
    if (re) begin
      word_q <= mem[r_adr[$bits(r_adr)-1:SEL_W]];
      sel_q  <= r_adr[SEL_W-1:0];
    end
  end

  assign rdata = word_q[sel_q*PIX_W +: PIX_W];

endmodule
