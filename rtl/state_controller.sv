// state_controller -- sequences the labeling of a frame line by line.
//
// Phases (phase_e):
//   PH_IDLE   wait until the input FIFO holds data, then start a frame (label counter
//             cleared).
//   PH_LOAD   input_controller copies line 0 from the input FIFO into memory_img.
//   PH_LABEL  one line is labeled: pixels are read from memory_img and labeled by
//             label_generator, one per clock, in groups of four followed by one idle
//             clock, so a line takes 5*WIDTH/4 clocks (2400 for 1920 pixels) plus 2
//             clocks of pipeline. The labels go to the current label line buffer
//             while the previous line's labels are read from the other one.
//             In parallel, input_controller loads the next line into the other slot
//             of memory_img, and the previous line's labels -- which the reference
//             reads fetch anyway, in order -- are handed to output_controller.
//             The phase ends when the line is labeled and the next one loaded.
//   PH_OUTPUT after the last line of a frame its labels are read back and handed to
//             output_controller, one per clock while it is ready.
// In steady state a line therefore costs 5*WIDTH/4 + 2 clocks, 2402 for full HD, and
// a frame about 2.6 million clocks.
//
// Stall: while a line is being output and output_controller is not ready (output
// FIFO full), the issue stage stops; the two pipeline stages behind it drain.
//
// Label line buffers: lines 0, 2, 4, ... are written to label_data1 while label_data0
// is read; odd lines the other way round (lab_wsel=1: label_data1 is written). The
// read port of both buffers shares lab_r_adr; lab_rd_sel, registered to line up with
// the one-clock read latency, steers the read-data multiplexer.
// memory_img slots: line y is stored in slot y%2; img_r_adr = {slot, x}.
//
// Reference window: previous-line labels arrive through one 8-bit read path. Three
// registers form a sliding window: for pixel x the read of prev[x+1] supplies
// right-up, and the two older values are up and left-up. prev[0] is fetched in the
// idle clock that opens a line. References outside the image, and the whole previous
// line on the first line of a frame, are presented as 0.
//
// Pipeline of the LABEL phase: I (issue addresses) -> D (read data back; load
// label_generator; label to output_controller) -> E (label valid; written to the
// current line buffer).
//
// From the published design: the controller's name and what it drives (memory
// addresses, write enables, the label_data0/1 swap), 5 clocks per 4 pixels and 2,400
// clocks per line. This design's own: the phases, the place of the idle clock, the
// window, the two memory_img slots and the output taken from the reference reads.
module state_controller
  import labeling_pkg::*;
#(
  parameter int unsigned WIDTH  = IMG_WIDTH,   // pixels per line, multiple of 4
  parameter int unsigned HEIGHT = IMG_HEIGHT   // lines per frame
) (
  input  logic       clk,
  input  logic       rst_n,
  // status
  output phase_e     phase,
  output logic       line_done,      // pulse: a line has been labeled
  output logic       frame_done,     // pulse: the last labels of a frame left for the FIFO
  // input side
  input  logic       in_fifo_empty,
  output logic       ic_start,
  output logic       ic_slot,
  input  logic       ic_done,
  // memory_img read port
  output logic       img_re,
  output img_radr_t  img_r_adr,
  // label_generator control and references
  output logic       gen_frame_start,
  output logic       gen_load,
  output logic       gen_line_start,
  output label_t     gen_ref_leftup,
  output label_t     gen_ref_up,
  output label_t     gen_ref_rightup,
  // label_data0/1
  output logic       lab_wsel,       // 1: label_data1 is the current (written) line
  output logic       lab_we,
  output line_addr_t lab_w_adr,
  output logic       lab_re,
  output line_addr_t lab_r_adr,
  output logic       lab_rd_sel,     // read-data mux: 1 selects label_data1
  input  label_t     lab_rdata,      // after the mux
  // output_controller
  output logic       oc_valid,
  input  logic       oc_ready,
  input  logic       oc_idle
);

  localparam int unsigned LINE_W = $clog2(HEIGHT + 1);
  localparam int unsigned GROUP  = PIX_PER_WORD + 1;   // 4 pixels + 1 idle clock

  phase_e              phase_q;
  logic [LINE_W-1:0]   line_q;
  logic                ld_started_q;    // load of the next line requested
  logic                ld_pend_q;       // ... and not finished yet
  logic [2:0]          grp_cyc_q;       // 0 = idle clock, 1..4 = pixel issue
  line_addr_t          x_i_q;           // next pixel (or label, in PH_OUTPUT) to issue
  logic                issue_done_q;    // all pixels of the line issued / read
  logic                lab_fin_q;       // last label of the line written
  // D and E stages
  logic                d_issue_q, d_pf_q, e_valid_q;
  line_addr_t          d_x_q, e_x_q;
  label_t              win_lu_q, win_up_q;  // prev[x-1], prev[x] for the pixel in D
  logic                first_line, last_line, out_en, out_stall, lab_fin;
  label_t              ru;

  // issue-stage decode
  logic i_adv, i_pf, i_issue, o_issue;

  assign phase      = phase_q;
  assign first_line = (line_q == '0);
  assign last_line  = (line_q == LINE_W'(HEIGHT - 1));
  assign lab_wsel   = ~line_q[0];

  always_comb begin
    out_en    = !first_line;                   // previous line goes out during this one
    out_stall = (phase_q == PH_LABEL) && !issue_done_q && out_en && !oc_ready;
    i_adv     = (phase_q == PH_LABEL) && !issue_done_q && !out_stall;
    i_pf      = i_adv && grp_cyc_q == 3'd0 && x_i_q == '0;
    i_issue   = i_adv && grp_cyc_q != 3'd0;
    o_issue   = (phase_q == PH_OUTPUT) && !issue_done_q && oc_ready;

    img_re    = i_issue;
    img_r_adr = img_radr_t'({line_q[0], x_i_q});
    lab_re    = i_pf || i_issue || o_issue;
    if (o_issue)    lab_r_adr = x_i_q;
    else if (i_pf)  lab_r_adr = '0;
    else            lab_r_adr = x_i_q + 1'b1;

    // right-up reference for the pixel now in D
    ru = (first_line || d_x_q == line_addr_t'(WIDTH - 1)) ? '0 : lab_rdata;
    gen_load        = d_issue_q;
    gen_line_start  = d_issue_q && d_x_q == '0;
    gen_ref_leftup  = win_lu_q;
    gen_ref_up      = win_up_q;
    gen_ref_rightup = ru;

    lab_fin   = lab_fin_q || (e_valid_q && e_x_q == line_addr_t'(WIDTH - 1));
    lab_we    = e_valid_q;
    lab_w_adr = e_x_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q         <= PH_IDLE;
      line_q          <= '0;
      ld_started_q    <= 1'b0;
      ld_pend_q       <= 1'b0;
      ic_start        <= 1'b0;
      ic_slot         <= 1'b0;
      grp_cyc_q       <= '0;
      x_i_q           <= '0;
      issue_done_q    <= 1'b0;
      lab_fin_q       <= 1'b0;
      d_issue_q       <= 1'b0;
      d_pf_q          <= 1'b0;
      d_x_q           <= '0;
      e_valid_q       <= 1'b0;
      e_x_q           <= '0;
      win_lu_q        <= '0;
      win_up_q        <= '0;
      lab_rd_sel      <= 1'b0;
      oc_valid        <= 1'b0;
      gen_frame_start <= 1'b0;
      line_done       <= 1'b0;
      frame_done      <= 1'b0;
    end else begin
      ic_start        <= 1'b0;
      gen_frame_start <= 1'b0;
      line_done       <= 1'b0;
      frame_done      <= 1'b0;
      if (ic_done) ld_pend_q <= 1'b0;

      // pipeline registers (LABEL)
      d_issue_q <= i_issue;
      d_pf_q    <= i_pf;
      d_x_q     <= x_i_q;
      e_valid_q <= d_issue_q;
      e_x_q     <= d_x_q;
      if (d_pf_q) begin
        win_lu_q <= '0;
        win_up_q <= first_line ? '0 : lab_rdata;
      end else if (d_issue_q) begin
        win_lu_q <= win_up_q;
        win_up_q <= ru;
      end
      // label data for output_controller arrive one clock after their read:
      // prev[0] (prefetch), prev[1..WIDTH-1] (right-up reads) or the flush reads
      oc_valid <= o_issue || (out_en && (i_pf || (i_issue && x_i_q != line_addr_t'(WIDTH - 1))));
      if (lab_re) lab_rd_sel <= (phase_q == PH_OUTPUT) ? lab_wsel : ~lab_wsel;

      unique case (phase_q)
        PH_IDLE: begin
          if (!in_fifo_empty) begin
            phase_q         <= PH_LOAD;
            line_q          <= '0;
            gen_frame_start <= 1'b1;
            ic_start        <= 1'b1;
            ic_slot         <= 1'b0;
            ld_pend_q       <= 1'b1;
          end
        end

        PH_LOAD: begin
          if (!ld_pend_q) begin
            phase_q      <= PH_LABEL;
            grp_cyc_q    <= '0;
            x_i_q        <= '0;
            issue_done_q <= 1'b0;
            lab_fin_q    <= 1'b0;
            ld_started_q <= 1'b0;
          end
        end

        PH_LABEL: begin
          // load the next line into the other slot meanwhile
          if (!ld_started_q && !last_line) begin
            ic_start     <= 1'b1;
            ic_slot      <= ~line_q[0];
            ld_pend_q    <= 1'b1;
            ld_started_q <= 1'b1;
          end
          if (i_adv) begin
            grp_cyc_q <= (grp_cyc_q == 3'(GROUP - 1)) ? 3'd0 : grp_cyc_q + 3'd1;
            if (i_issue) begin
              x_i_q <= x_i_q + 1'b1;
              if (x_i_q == line_addr_t'(WIDTH - 1)) issue_done_q <= 1'b1;
            end
          end
          if (lab_fin) lab_fin_q <= 1'b1;
          // line labeled and the next one loaded
          if (lab_fin && !ld_pend_q && (ld_started_q || last_line)) begin
            line_done    <= 1'b1;
            x_i_q        <= '0;
            issue_done_q <= 1'b0;
            grp_cyc_q    <= '0;
            lab_fin_q    <= 1'b0;
            ld_started_q <= 1'b0;
            if (last_line) phase_q <= PH_OUTPUT;
            else           line_q  <= line_q + 1'b1;
          end
        end

        PH_OUTPUT: begin
          if (o_issue) begin
            x_i_q <= x_i_q + 1'b1;
            if (x_i_q == line_addr_t'(WIDTH - 1)) issue_done_q <= 1'b1;
          end
          if (issue_done_q && !oc_valid && oc_idle) begin
            frame_done <= 1'b1;
            phase_q    <= PH_IDLE;
          end
        end

        default: phase_q <= PH_IDLE;
      endcase
    end
  end

  initial assert (WIDTH % PIX_PER_WORD == 0 && WIDTH >= PIX_PER_WORD && WIDTH <= 2**LINE_ADDR_W)
    else $error("state_controller: WIDTH must be a multiple of 4 and at most 2048");

endmodule
