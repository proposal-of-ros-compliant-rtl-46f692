// tb_label_generator -- self-checking test of the one-pixel labeling cell.
//
// Drives random pixels (about half white) and random previous-line references
// (often zero, so fresh labels occur) with occasional line starts, frame starts and
// idle cycles between loads. A reference model in the testbench keeps its own Left
// and Current Label values and predicts every output label and fresh-label flag.
module tb_label_generator;
  import labeling_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   frame_start = 0, load = 0, line_start = 0;
  pixel_t new_pixel = '0;
  label_t lu = '0, up = '0, ru = '0;
  label_t out_label;
  logic   out_new;
  int     checks = 0, failures = 0;

  label_generator dut (.clk, .rst_n, .frame_start, .load, .line_start, .new_pixel,
                       .ref_leftup(lu), .ref_up(up), .ref_rightup(ru), .out_label, .out_new);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic label_t mnz(label_t a, label_t b);
    if (a == 0) return b;
    if (b == 0) return a;
    return a < b ? a : b;
  endfunction

  function automatic label_t rand_ref();
    return ($urandom_range(0, 2) == 0) ? label_t'($urandom_range(1, 40)) : '0;
  endfunction

  label_t m_left, m_cur, exp_label;
  logic   exp_new;
  int     n_new = 0, n_min = 0, n_black = 0;

  initial begin
    m_left = 0; m_cur = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      if (i % 1000 == 0) begin
        frame_start <= 1; @(posedge clk); frame_start <= 0;
        m_left = 0; m_cur = 0;
      end
      // drive one pixel
      line_start <= (i % 37 == 0);
      new_pixel  <= ($urandom_range(0, 1) == 1) ? pixel_t'($urandom_range(1, 255)) : '0;
      lu <= rand_ref(); up <= rand_ref(); ru <= rand_ref();
      load <= 1;
      @(posedge clk);
      load <= 0;
      if (line_start) m_left = 0;
      // expected result of this pixel
      if (new_pixel == 0) begin exp_label = 0; exp_new = 0; n_black++; end
      else if (lu == 0 && up == 0 && ru == 0 && m_left == 0) begin
        exp_label = m_cur + 1; exp_new = 1; n_new++;
      end else begin
        exp_label = mnz(mnz(lu, up), mnz(ru, m_left)); exp_new = 0; n_min++;
      end
      repeat ($urandom_range(0, 2)) @(posedge clk);   // idle cycles, result must hold
      #1;
      checks++;
      if (out_label !== exp_label || out_new !== exp_new) begin
        failures++;
        if (failures < 10) $display("pixel %0d: got %0d/%0b expected %0d/%0b", i, out_label, out_new, exp_label, exp_new);
      end
      m_left = exp_label;
      if (exp_new) m_cur = exp_label;
    end
    checks++;
    if (n_new == 0 || n_min == 0 || n_black == 0) failures++;
    $display("fresh=%0d min=%0d black=%0d", n_new, n_min, n_black);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
