// tb_labeling_top -- end-to-end test of the labeling core, reduced size (64 x 12 pixels, three frames, 8-word FIFOs).
//
// The testbench plays the host: it builds a binary image of random rectangles,
// discs and isolated dots (white pixels are mostly 255, some other non-zero
// values), streams it into the input FIFO four pixels per word while honouring
// `in_full` (with pauses so the input FIFO runs empty), and drains the output FIFO
// with long read pauses so that it fills up and back-pressures the core.
// A reference model of the first labeling pass (8-connectivity, raster order,
// fresh label = last fresh label + 1 with 8-bit wrap, else the smallest non-zero
// neighbour label) gives the expected label of every pixel; every output word is
// compared. The testbench also checks that each LABEL phase lasts 5*WIDTH/4 + 2
// clocks, not counting clocks stalled by a full output path or spent waiting for
// the next line to arrive, and counts how often each mechanism occurred: fresh
// labels, minimum selection, black pixels, both label line buffers written, input
// FIFO empty while loading, output FIFO full, labeling stalled, frames completed.
// A mechanism that never occurred counts as a failure.
module tb_labeling_top;
  import labeling_pkg::*;

  localparam int unsigned W      = 64;
  localparam int unsigned H      = 12;
  localparam int unsigned FRAMES = 3;
  localparam int unsigned PAUSE  = 300;   // period of host pauses, clocks
  localparam bit          HOST_PAUSES = 1;

  logic   clk = 0, rst_n = 0;
  logic   in_wr_en, in_full, out_rd_en, out_empty;
  word_t  in_wdata, out_rdata;
  phase_e phase;
  logic   line_done, frame_done, label_alloc;
  int     checks = 0, failures = 0;

  labeling_top #(.WIDTH(64), .HEIGHT(12), .FIFO_WORDS(8)) dut (
    .clk, .rst_n, .in_wr_en, .in_wdata, .in_full, .out_rd_en, .out_rdata, .out_empty,
    .phase, .line_done, .frame_done, .label_alloc);

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- image and reference model ----------------
  byte unsigned img [];     // FRAMES*H*W pixels
  byte unsigned expl [];    // expected labels
  int n_fresh = 0, n_min = 0, n_black = 0;

  function automatic int idx(int f, int y, int x);
    return (f * H + y) * W + x;
  endfunction

  task automatic make_image();
    img  = new[FRAMES * H * W];
    expl = new[FRAMES * H * W];
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < H * W; i++) img[f * H * W + i] = 0;
      // rectangles
      repeat (W * H / 4000 + 4) begin
        int x0 = $urandom_range(0, W - 1), y0 = $urandom_range(0, H - 1);
        int w = $urandom_range(1, (W < 228) ? W / 6 + 2 : 40), h = $urandom_range(1, (H < 112) ? H / 4 + 2 : 30);
        for (int y = y0; y < y0 + h && y < H; y++)
          for (int x = x0; x < x0 + w && x < W; x++) img[idx(f, y, x)] = 255;
      end
      // discs (concave shapes arise where they overlap)
      repeat (W * H / 8000 + 3) begin
        int cx = $urandom_range(0, W - 1), cy = $urandom_range(0, H - 1);
        int r = $urandom_range(1, (H < 90) ? H / 5 + 2 : 20);
        for (int y = cy - r; y <= cy + r; y++)
          for (int x = cx - r; x <= cx + r; x++)
            if (y >= 0 && y < H && x >= 0 && x < W && (x-cx)*(x-cx) + (y-cy)*(y-cy) <= r*r)
              img[idx(f, y, x)] = byte'($urandom_range(1, 255));
      end
      // isolated dots
      repeat (W * H / 200 + 5) img[idx(f, $urandom_range(0, H - 1), $urandom_range(0, W - 1))] = 8'h80;
    end
  endtask

  task automatic model();
    for (int f = 0; f < FRAMES; f++) begin
      byte unsigned cur = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          byte unsigned lu, up, ru, lf, m, l;
          lu = (y > 0 && x > 0)     ? expl[idx(f, y-1, x-1)] : 0;
          up = (y > 0)              ? expl[idx(f, y-1, x)]   : 0;
          ru = (y > 0 && x < W - 1) ? expl[idx(f, y-1, x+1)] : 0;
          lf = (x > 0)              ? expl[idx(f, y, x-1)]   : 0;
          m = 0;
          if (lu != 0 && (m == 0 || lu < m)) m = lu;
          if (up != 0 && (m == 0 || up < m)) m = up;
          if (ru != 0 && (m == 0 || ru < m)) m = ru;
          if (lf != 0 && (m == 0 || lf < m)) m = lf;
          if (img[idx(f, y, x)] == 0) begin l = 0; n_black++; end
          else if (m == 0) begin cur = cur + 1; l = cur; n_fresh++; end
          else begin l = m; n_min++; end
          expl[idx(f, y, x)] = l;
        end
    end
  endtask

  // ---------------- host: producer ----------------
  // in_wr_en is combinational on in_full so that no word is offered to a full FIFO
  int   in_words = 0;
  logic in_want = 0;
  assign in_wr_en = in_want && !in_full;
  always_comb for (int k = 0; k < 4; k++) in_wdata[8*k +: 8] = img[4 * in_words + k];
  always @(posedge clk) begin
    if (in_wr_en) in_words <= in_words + 1;
    in_want <= rst_n && (in_words + int'(in_wr_en) < FRAMES * H * W / 4) && (!HOST_PAUSES || ((cycle / 97) % 5) != 0);
  end

  // ---------------- host: consumer ----------------
  int   out_words = 0;
  logic rd_q = 0, out_want = 0;
  assign out_rd_en = out_want && !out_empty;
  always @(posedge clk) out_want <= rst_n && (!HOST_PAUSES || ((cycle / PAUSE) % 4) != 0);
  always @(posedge clk) if (rst_n) begin
    rd_q <= out_rd_en;
    if (rd_q) begin
      word_t exp;
      for (int k = 0; k < 4; k++) exp[8*k +: 8] = expl[4 * out_words + k];
      checks++;
      if (out_rdata !== exp) begin
        failures++;
        if (failures < 10) $display("word %0d (frame %0d line %0d x %0d): got %08h expected %08h",
          out_words, out_words / (H * W / 4), (out_words % (H * W / 4)) / (W / 4),
          4 * (out_words % (W / 4)), out_rdata, exp);
      end
      out_words <= out_words + 1;
    end
  end

  // ---------------- timing and mechanism counters ----------------
  int label_clocks = 0, lines = 0, frames = 0, n_in_empty = 0, n_out_full = 0, n_stall = 0;
  int first_in = -1, last_frame_done = 0;
  int n_wsel0 = 0, n_wsel1 = 0, n_alloc = 0;
  int frame_label_clocks = 0;
  always @(posedge clk) if (rst_n) begin
    // line_done arrives in the first clock of the next line, which already counts
    logic cnt;
    cnt = phase == PH_LABEL && !dut.u_state_controller.out_stall && !dut.u_state_controller.lab_fin_q;
    if (cnt) label_clocks <= label_clocks + 1;
    if (dut.u_state_controller.out_stall) n_stall <= n_stall + 1;
    if (in_wr_en && first_in < 0) first_in <= cycle;
    if (frame_done) last_frame_done <= cycle;
    if (dut.u_input_controller.busy && dut.if_empty) n_in_empty <= n_in_empty + 1;
    if (dut.of_full) n_out_full <= n_out_full + 1;
    if (label_alloc) n_alloc <= n_alloc + 1;
    if (dut.lab_we) begin
      if (dut.lab_wsel) n_wsel1 <= n_wsel1 + 1; else n_wsel0 <= n_wsel0 + 1;
    end
    if (line_done) begin
      checks++;
      if (label_clocks != 5 * W / 4 + 2) begin
        failures++;
        $display("line %0d: LABEL phase %0d clocks, expected %0d", lines, label_clocks, 5 * W / 4 + 2);
      end
      frame_label_clocks <= frame_label_clocks + label_clocks;
      label_clocks <= int'(cnt);
    end
    if (line_done) lines <= lines + 1;
    if (frame_done) frames <= frames + 1;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-32s %0d", what, n);
    if (n == 0) begin failures++; $display("  ... never happened"); end
  endtask

  initial begin
    make_image();
    model();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (frames == FRAMES && out_words == FRAMES * H * W / 4);
    repeat (10) @(posedge clk);
    checks++;
    if (lines != FRAMES * H || !out_empty) begin
      failures++;
      $display("lines %0d, output FIFO empty %0b", lines, out_empty);
    end
    checks++;
    if (n_alloc != n_fresh) begin failures++; $display("fresh labels %0d expected %0d", n_alloc, n_fresh); end
    $display("image %0d x %0d, %0d frame(s), %0d clocks in total", W, H, FRAMES, cycle);
    $display("labeling clocks per frame: %0d (%0d per line)", frame_label_clocks / FRAMES, 5 * W / 4 + 2);
    need("fresh labels", n_alloc);
    need("minimum-of-neighbours labels", n_min);
    need("black pixels", n_black);
    need("label_data0 writes", n_wsel0);
    need("label_data1 writes", n_wsel1);
    need("input FIFO empty while loading", n_in_empty);
    need("output FIFO full clocks", n_out_full);
    need("labeling stalled by the output", n_stall);
    need("frames completed", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
