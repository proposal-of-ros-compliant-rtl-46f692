// label_generator -- one-pixel-per-clock labeling cell (first labeling pass).
//
// Function: for a pixel of a binary image and the labels already given to its four
// neighbours that precede it in raster order (left-up, up, right-up on the previous
// line, left on the current line) it produces the pixel's label:
//   * pixel black (0)                      -> label 0
//   * pixel white, all four references 0   -> a fresh label, Current Label + 1
//   * pixel white, some reference non-zero -> the smallest non-zero reference
// Label equivalences (two regions that later turn out to touch) are not merged; that
// is the job of a second pass that this core does not contain.
//
// Structure: as in the published circuit diagram, the new pixel and the three
// previous-line references are held in input registers, the left reference is a
// register fed back from the output, and a Current Label register with a +1 adder
// supplies fresh labels. FLAG_WHITE, FLAG_ALL_ZERO and a minimum selector drive two
// multiplexers to the output.
//
// Interface and timing: when `load` is high at a clock edge the input registers take
// new_pixel / ref_*; `out_label` is combinational from the registers and is valid in
// the following cycle, and stays valid until the next load. The result of a pixel is
// committed (Left register takes it, Current Label advances if it was fresh) at the
// next `load`. `line_start` with a load clears the Left reference (first pixel of a
// line); `frame_start` clears Current Label and Left so labels of a frame start at 1.
// The caller presents 0 for references outside the image.
//
// Own choices: "white" means any non-zero pixel value; the 8-bit Current Label wraps
// after 255 like the 8-bit adder in the diagram; the commit-at-next-load scheme.
module label_generator
  import labeling_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   frame_start,   // clears Current Label and Left (no load needed)
  input  logic   load,          // capture a new pixel and its references
  input  logic   line_start,    // with load: the pixel is the first of its line
  input  pixel_t new_pixel,
  input  label_t ref_leftup,
  input  label_t ref_up,
  input  label_t ref_rightup,
  output label_t out_label,
  output logic   out_new        // out_label is a freshly allocated label
);

  pixel_t pix_q;
  label_t lu_q, up_q, ru_q, left_q;
  label_t cur_label_q;
  logic   valid_q;

  // FLAG_WHITE, FLAG_ALL_ZERO, Select MinNum, +1
  logic   flag_white, flag_all_zero;
  label_t min_num, next_label;

  function automatic label_t min_nz(input label_t a, input label_t b);
    if (a == '0)      return b;
    else if (b == '0) return a;
    else              return (a < b) ? a : b;
  endfunction

  always_comb begin
    flag_white    = (pix_q != '0);
    flag_all_zero = (lu_q == '0) && (up_q == '0) && (ru_q == '0) && (left_q == '0);
    min_num       = min_nz(min_nz(lu_q, up_q), min_nz(ru_q, left_q));
    next_label    = cur_label_q + label_t'(1);
    if (!flag_white)        out_label = '0;
    else if (flag_all_zero) out_label = next_label;
    else                    out_label = min_num;
    out_new = valid_q && flag_white && flag_all_zero;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_q <= '0; lu_q <= '0; up_q <= '0; ru_q <= '0; left_q <= '0;
      cur_label_q <= '0;
      valid_q <= 1'b0;
    end else if (frame_start) begin
      cur_label_q <= '0;
      left_q      <= '0;
      valid_q     <= 1'b0;
    end else if (load) begin
      // commit the result of the previous pixel
      if (out_new) cur_label_q <= next_label;
      left_q  <= line_start ? '0 : (valid_q ? out_label : '0);
      // capture the new pixel and its previous-line references
      pix_q   <= new_pixel;
      lu_q    <= ref_leftup;
      up_q    <= ref_up;
      ru_q    <= ref_rightup;
      valid_q <= 1'b1;
    end
  end

endmodule
