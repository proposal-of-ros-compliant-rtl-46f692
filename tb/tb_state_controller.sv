// tb_state_controller -- self-checking test of the line sequencer.
//
// The surroundings are modelled in the testbench: input_controller answers `start`
// with `done` after a random delay (sometimes longer than a line takes to label);
// the two label line buffers are arrays with a one-clock read latency whose read
// data pass through the lab_rd_sel multiplexer; output_controller's `ready` drops at
// random. A 16 x 4 image is run for two frames. Checked:
//   * line 0 is loaded into memory_img slot 0 first, every later line into slot
//     y%2 while line y-1 is labeled; pixel reads go to {y%2, x} in order;
//   * every label_generator load has line_start exactly at x = 0 and the references
//     prev[x-1], prev[x], prev[x+1] of the previous line (0 outside the image and on
//     line 0);
//   * every label write goes to address x in order, to the buffer that alternates
//     every line (label_data1 on even lines);
//   * the LABEL phase lasts 5*WIDTH/4 + 2 clocks, not counting stall clocks
//     (output not ready) and clocks spent waiting for the next line's load;
//   * output_controller receives every label of every line exactly once, in order:
//     line y-1 during line y, the last line in the OUTPUT phase;
//   * line_done / frame_done pulse once per line / frame, frame_start once per frame.
module tb_state_controller;
  import labeling_pkg::*;

  localparam int unsigned W = 16, H = 4;

  logic clk = 0, rst_n = 0;
  phase_e phase;
  logic line_done, frame_done, in_fifo_empty = 1, ic_start, ic_slot, ic_done = 0;
  logic img_re; img_radr_t img_r_adr;
  logic gen_frame_start, gen_load, gen_line_start;
  label_t gen_lu, gen_up, gen_ru;
  logic lab_wsel, lab_we, lab_re, lab_rd_sel;
  line_addr_t lab_w_adr, lab_r_adr;
  label_t lab_rdata;
  logic oc_valid, oc_ready = 1, oc_idle;
  int checks = 0, failures = 0;

  state_controller #(.WIDTH(W), .HEIGHT(H)) dut (
    .clk, .rst_n, .phase, .line_done, .frame_done, .in_fifo_empty, .ic_start, .ic_slot, .ic_done,
    .img_re, .img_r_adr, .gen_frame_start, .gen_load, .gen_line_start,
    .gen_ref_leftup(gen_lu), .gen_ref_up(gen_up), .gen_ref_rightup(gen_ru),
    .lab_wsel, .lab_we, .lab_w_adr, .lab_re, .lab_r_adr, .lab_rd_sel, .lab_rdata,
    .oc_valid, .oc_ready, .oc_idle);

  always #5 clk = ~clk;

  // label buffers: the TB writes line*16 + x + 1 at each label write
  label_t buf0 [2048], buf1 [2048], rd0, rd1;
  always @(posedge clk) begin
    if (lab_re) begin rd0 <= buf0[lab_r_adr]; rd1 <= buf1[lab_r_adr]; end
  end
  assign lab_rdata = lab_rd_sel ? rd1 : rd0;

  // input_controller model
  int ic_delay = -1;
  always @(posedge clk) begin
    ic_done <= 0;
    if (ic_start) ic_delay <= ($urandom_range(0, 2) == 0) ? $urandom_range(20, 40) : $urandom_range(1, 6);
    else if (ic_delay > 0) ic_delay <= ic_delay - 1;
    else if (ic_delay == 0) begin ic_done <= 1; ic_delay <= -1; end
  end

  // output_controller model
  assign oc_idle = !oc_valid;
  always @(posedge clk) oc_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("%0t: %s", $time, msg);
  endtask

  int line = 0, loads_started = 0, img_x = 0, gen_x = 0, wr_x = 0, label_cycles = 0;
  int out_line = 0, out_x = 0, n_stall = 0, n_wait_load = 0;
  int n_line_done = 0, n_frame_done = 0, n_frame_start = 0, frame_start_at_end = 0;

  function automatic label_t prev(int x);
    if (line == 0 || x < 0 || x >= W) return 0;
    return label_t'(((line - 1) * 16 + x + 1) % 256);
  endfunction

  always @(negedge clk) if (rst_n) begin
    // line_done arrives in the first clock of the next line: close the line first
    if (line_done) begin
      n_line_done++;
      checks++;
      if (img_x != W || gen_x != W || wr_x != W || label_cycles != 5 * W / 4 + 2)
        fail($sformatf("line %0d: reads %0d loads %0d writes %0d label clocks %0d", line, img_x, gen_x, wr_x, label_cycles));
      img_x = 0; gen_x = 0; wr_x = 0; label_cycles = 0;
      line = (line + 1) % H;
    end
    if (gen_frame_start) n_frame_start++;
    if (phase == PH_LABEL && !dut.out_stall && !dut.lab_fin_q) label_cycles++;
    if (dut.out_stall) n_stall++;
    if (phase == PH_LABEL && dut.lab_fin_q) n_wait_load++;
    if (ic_start) begin
      // line 0 of a frame, then line y+1 during line y
      checks++;
      if (ic_slot !== 1'((loads_started % H) % 2)) fail($sformatf("load %0d into slot %0b", loads_started, ic_slot));
      loads_started++;
    end
    if (img_re) begin
      checks++;
      if (img_r_adr !== img_radr_t'((line % 2) * 2048 + img_x))
        fail($sformatf("line %0d pixel read %0h", line, img_r_adr));
      img_x++;
    end
    if (gen_load) begin
      checks++;
      if (gen_line_start !== (gen_x == 0) || gen_lu !== prev(gen_x - 1) || gen_up !== prev(gen_x) || gen_ru !== prev(gen_x + 1))
        fail($sformatf("line %0d x %0d: refs %0d %0d %0d ls=%0b", line, gen_x, gen_lu, gen_up, gen_ru, gen_line_start));
      gen_x++;
    end
    if (lab_we) begin
      checks++;
      if (lab_w_adr !== line_addr_t'(wr_x) || lab_wsel !== (line % 2 == 0))
        fail($sformatf("line %0d write adr %0d wsel %0b", line, lab_w_adr, lab_wsel));
      if (lab_wsel) buf1[lab_w_adr] = label_t'(line * 16 + wr_x + 1);
      else          buf0[lab_w_adr] = label_t'(line * 16 + wr_x + 1);
      wr_x++;
    end
    if (oc_valid) begin
      checks++;
      if (lab_rdata !== label_t'(out_line * 16 + out_x + 1))
        fail($sformatf("output line %0d x %0d: %0d", out_line, out_x, lab_rdata));
      out_x++;
      if (out_x == W) begin out_x = 0; out_line = (out_line + 1) % H; end
    end
    if (frame_done) begin
      n_frame_done++;
      checks++;
      if (out_line != 0 || out_x != 0 || n_line_done != n_frame_done * H)
        fail($sformatf("frame end: output at line %0d x %0d, %0d lines", out_line, out_x, n_line_done));
      if (n_frame_done == 2) frame_start_at_end = n_frame_start;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    in_fifo_empty <= 0;
    wait (n_frame_done == 2);
    @(negedge clk);
    checks++;
    if (frame_start_at_end != 2 || n_stall == 0 || n_wait_load == 0)
      fail($sformatf("frame_start %0d, stalls %0d, load waits %0d", frame_start_at_end, n_stall, n_wait_load));
    $display("stall clocks %0d, clocks waiting for a load %0d", n_stall, n_wait_load);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
