// tb_input_controller -- self-checking test of the line loader.
//
// A queue stands in for the input FIFO (standard read timing, random empty gaps).
// Three lines of a 64-pixel-wide image (16 words each) are loaded into alternating
// memory_img slots; every memory write is checked for slot, address order and data, the number of words per line is
// checked, `done` must pulse once per line right after the last write, and the
// controller must not pop more than one line's words per start.
module tb_input_controller;
  import labeling_pkg::*;

  localparam int unsigned WIDTH = 64;
  localparam int unsigned WORDS = WIDTH / 4;

  logic clk = 0, rst_n = 0, start = 0, slot = 0;
  logic busy, done, fifo_re, img_we;
  word_t fifo_rdata = '0, img_wdata;
  logic fifo_empty;
  img_wadr_t img_w_adr;
  int checks = 0, failures = 0;
  word_t src[$];      // words available in the "FIFO"
  word_t sent[$];     // words popped, in order
  logic  gap = 0;

  input_controller #(.WIDTH(WIDTH)) dut (.clk, .rst_n, .start, .slot, .busy, .done, .fifo_re, .fifo_rdata,
                                         .fifo_empty, .img_we, .img_w_adr, .img_wdata);

  always #5 clk = ~clk;

  assign fifo_empty = (src.size() == 0) || gap;

  // sample the pop request mid-cycle, when it is stable; apply it at the edge
  logic pend = 0;
  always @(negedge clk) begin
    pend = fifo_re;
    if (pend) begin
      sent.push_back(src[0]);
      void'(src.pop_front());
    end
  end
  always @(posedge clk) begin
    if (pend) fifo_rdata <= sent[sent.size() - 1];
    gap <= ($urandom_range(0, 3) == 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int writes, dones;
    for (int i = 0; i < 3 * WORDS + 5; i++) src.push_back($urandom);   // more than 3 lines
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int line = 0; line < 3; line++) begin
      start <= 1; slot <= line[0]; @(posedge clk); start <= 0; slot <= 0;
      writes = 0; dones = 0;
      while (dones == 0) begin
        @(negedge clk);
        if (img_we) begin
          checks++;
          if (img_w_adr !== img_wadr_t'(line[0] * 512 + writes) || img_wdata !== sent[line * WORDS + writes]) begin
            failures++;
            if (failures < 10) $display("line %0d write %0d: adr %0d data %08h", line, writes, img_w_adr, img_wdata);
          end
          writes++;
        end
        @(posedge clk); #1;
        if (done) dones++;
      end
      checks++;
      if (writes != WORDS || busy) begin failures++; $display("line %0d: %0d writes", line, writes); end
      repeat (5) @(posedge clk);
      checks++;
      if (sent.size() != (line + 1) * WORDS) begin failures++; $display("popped %0d", sent.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
