// labeling_top -- line-based image labeling accelerator (first labeling pass).
//
// A host streams a binary image, four 8-bit pixels per 32-bit word, row by row, into
// the input FIFO; the core returns one 8-bit label per pixel, four per 32-bit word in
// the same order, through the output FIFO. Labels are assigned with 8-connectivity
// in raster order; touching regions that met only later in the scan keep different
// labels (no equivalence merging).
//
// Structure, following the published block diagram: an input FIFO, input_controller
// filling memory_img a line at a time, label_generator labeling one pixel per clock
// from memory_img and the previous line's labels, two label line buffers
// label_data0/1 used in ping-pong, a read-data multiplexer whose output feeds both
// the reference path and output_controller, and an output FIFO, all sequenced by
// state_controller. Loading the next line, labeling the current one and sending out
// the previous one overlap.
// The host-side FIFO ports stand for the bridge IP that connects the FIFOs to the
// processor; both FIFOs use the same clock here.
//
// Timing, when the FIFOs neither starve nor fill: 5*WIDTH/4 + 2 clocks per line
// (2402 for full HD, four pixels per five clocks), plus WIDTH/4 clocks to load the
// first line and about WIDTH clocks to send the last one: 2.6 million clocks, 26 ms
// at 100 MHz, for a 1920 x 1080 frame. Output words appear during the next line.
module labeling_top
  import labeling_pkg::*;
#(
  parameter int unsigned WIDTH      = IMG_WIDTH,
  parameter int unsigned HEIGHT     = IMG_HEIGHT,
  parameter int unsigned FIFO_WORDS = FIFO_DEPTH
) (
  input  logic   clk,
  input  logic   rst_n,
  // host side of the input FIFO (image words)
  input  logic   in_wr_en,
  input  word_t  in_wdata,
  output logic   in_full,
  // host side of the output FIFO (label words)
  input  logic   out_rd_en,
  output word_t  out_rdata,
  output logic   out_empty,
  // status
  output phase_e phase,
  output logic   line_done,
  output logic   frame_done,
  output logic   label_alloc      // label_generator issued a fresh label this cycle
);

  localparam int unsigned LAB_A_W  = $clog2(LABEL_DEPTH);

  // input FIFO <-> input_controller
  logic  if_re, if_empty;
  word_t if_rdata;
  // input_controller <-> state_controller / memory_img
  logic       ic_start, ic_slot, ic_done;
  logic       img_we, img_re;
  img_wadr_t  img_w_adr;
  img_radr_t  img_r_adr;
  word_t      img_wdata;
  pixel_t     pixel;
  // label_generator
  logic   gen_frame_start, gen_load, gen_line_start, gen_new;
  label_t ref_lu, ref_up, ref_ru, label_result;
  // label_data0/1
  logic       lab_wsel, lab_we, lab_re, lab_rd_sel;
  line_addr_t lab_w_adr, lab_r_adr;
  label_t     lab0_rdata, lab1_rdata, lab_rdata;
  // output_controller <-> output FIFO
  logic  oc_valid, oc_ready, oc_idle, of_we, of_full;
  word_t of_wdata;

  fifo32 #(.DEPTH(FIFO_WORDS)) u_fifo_in (
    .clk, .rst_n,
    .wr_en(in_wr_en), .din(in_wdata), .full(in_full),
    .rd_en(if_re), .dout(if_rdata), .empty(if_empty)
  );

  input_controller #(.WIDTH(WIDTH)) u_input_controller (
    .clk, .rst_n,
    .start(ic_start), .slot(ic_slot), .busy(), .done(ic_done),
    .fifo_re(if_re), .fifo_rdata(if_rdata), .fifo_empty(if_empty),
    .img_we, .img_w_adr, .img_wdata
  );

  memory_img #(.WORDS(IMG_WORDS)) u_memory_img (
    .clk,
    .we(img_we), .w_adr(img_w_adr), .wdata(img_wdata),
    .re(img_re), .r_adr(img_r_adr), .rdata(pixel)
  );

  state_controller #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_state_controller (
    .clk, .rst_n,
    .phase, .line_done, .frame_done,
    .in_fifo_empty(if_empty),
    .ic_start, .ic_slot, .ic_done,
    .img_re, .img_r_adr,
    .gen_frame_start, .gen_load, .gen_line_start,
    .gen_ref_leftup(ref_lu), .gen_ref_up(ref_up), .gen_ref_rightup(ref_ru),
    .lab_wsel, .lab_we, .lab_w_adr, .lab_re, .lab_r_adr, .lab_rd_sel,
    .lab_rdata,
    .oc_valid, .oc_ready, .oc_idle
  );

  label_generator u_label_generator (
    .clk, .rst_n,
    .frame_start(gen_frame_start), .load(gen_load), .line_start(gen_line_start),
    .new_pixel(pixel),
    .ref_leftup(ref_lu), .ref_up(ref_up), .ref_rightup(ref_ru),
    .out_label(label_result), .out_new(gen_new)
  );

  label_data #(.DEPTH(LABEL_DEPTH)) u_label_data0 (
    .clk,
    .we(lab_we && !lab_wsel), .w_adr(LAB_A_W'(lab_w_adr)), .wdata(label_result),
    .re(lab_re), .r_adr(LAB_A_W'(lab_r_adr)), .rdata(lab0_rdata)
  );

  label_data #(.DEPTH(LABEL_DEPTH)) u_label_data1 (
    .clk,
    .we(lab_we && lab_wsel), .w_adr(LAB_A_W'(lab_w_adr)), .wdata(label_result),
    .re(lab_re), .r_adr(LAB_A_W'(lab_r_adr)), .rdata(lab1_rdata)
  );

  // a fresh label counts once, in the clock its pixel's label is written
  assign label_alloc = gen_new && lab_we;

  // label read-data multiplexer (feeds both the reference window and the output)
  assign lab_rdata = lab_rd_sel ? lab1_rdata : lab0_rdata;

  output_controller u_output_controller (
    .clk, .rst_n,
    .lab_valid(oc_valid), .lab_data(lab_rdata),
    .ready(oc_ready), .idle(oc_idle),
    .fifo_we(of_we), .fifo_wdata(of_wdata), .fifo_full(of_full)
  );

  fifo32 #(.DEPTH(FIFO_WORDS)) u_fifo_out (
    .clk, .rst_n,
    .wr_en(of_we), .din(of_wdata), .full(of_full),
    .rd_en(out_rd_en), .dout(out_rdata), .empty(out_empty)
  );

endmodule
