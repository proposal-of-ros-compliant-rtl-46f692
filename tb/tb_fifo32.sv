// tb_fifo32 -- self-checking test of the 32-bit application FIFO.
//
// Random pushes and pops (only when not full / not empty, as the producers and
// consumers in the design do) against a queue model: every popped word is compared
// one clock after rd_en, and full/empty are compared with the model's fill level
// every cycle. Uses a depth of 8 so that full is reached often.
module tb_fifo32;
  import labeling_pkg::*;

  localparam int unsigned DEPTH = 8;

  logic  clk = 0, rst_n = 0;
  logic  wr_en = 0, rd_en = 0, full, empty;
  word_t din = '0, dout;
  int    checks = 0, failures = 0, n_full = 0, n_empty = 0;
  word_t q[$];
  word_t exp;
  logic  pop_q = 0;

  fifo32 #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .din, .full, .rd_en, .dout, .empty);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      // phases that favour filling or draining
      logic w, r;
      w = (i / 500) % 2 == 0 ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      r = (i / 500) % 2 == 0 ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (full !== (q.size() == DEPTH) || empty !== (q.size() == 0)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: full=%0b empty=%0b size=%0d", i, full, empty, q.size());
      end
      if (full) n_full++;
      if (empty) n_empty++;
      wr_en = w && !full;
      rd_en = r && !empty;
      din   = $urandom;
      if (rd_en) exp = q.pop_front();
      if (wr_en) q.push_back(din);
      @(posedge clk);
      pop_q = rd_en;
      #1;
      if (pop_q) begin
        checks++;
        if (dout !== exp) begin
          failures++;
          if (failures < 10) $display("cycle %0d: dout %08h expected %08h", i, dout, exp);
        end
      end
      wr_en = 0; rd_en = 0;
    end
    checks++;
    if (n_full == 0 || n_empty == 0) failures++;
    $display("full seen %0d, empty seen %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
