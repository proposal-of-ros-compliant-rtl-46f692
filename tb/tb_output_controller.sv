// tb_output_controller -- self-checking test of the label packer / FIFO writer.
//
// Sends 4000 random labels, one per clock whenever `ready` allowed it on the
// previous clock (the sender's one-clock read latency), while the FIFO `full`
// input toggles randomly. Every word written to the FIFO must hold the next four
// labels, label k in byte k%4; no write may happen while full; at the end `idle`
// must be high and all 1000 words delivered.
module tb_output_controller;
  import labeling_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   lab_valid = 0, ready, idle, fifo_we, fifo_full = 0, allow_full = 1;
  label_t lab_data = '0;
  word_t  fifo_wdata;
  int     checks = 0, failures = 0, n_full_stall = 0;
  label_t sent[$];
  logic   issue;

  output_controller dut (.clk, .rst_n, .lab_valid, .lab_data, .ready, .idle,
                         .fifo_we, .fifo_wdata, .fifo_full);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO side: check every write
  int words = 0;
  always @(posedge clk) if (rst_n) begin
    fifo_full <= allow_full && ($urandom_range(0, 2) == 0);
    if (fifo_we) begin
      word_t exp;
      checks++;
      for (int k = 0; k < 4; k++) exp[8*k +: 8] = sent[4*words + k];
      if (fifo_full || fifo_wdata !== exp) begin
        failures++;
        if (failures < 10) $display("word %0d: %08h expected %08h full=%0b", words, fifo_wdata, exp, fifo_full);
      end
      words++;
    end
    if (fifo_full && !ready) n_full_stall++;
  end

  initial begin
    int n;
    n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    issue = 0;
    while (n < 4000 || issue) begin
      // data of the read issued last clock arrives now
      lab_valid <= issue;
      if (issue) begin lab_data <= label_t'($urandom); end
      @(negedge clk);
      if (lab_valid) sent.push_back(lab_data);
      issue = ready && (n < 4000) && ($urandom_range(0, 7) != 0);
      if (issue) n++;
      @(posedge clk);
    end
    lab_valid  <= 0;
    allow_full <= 0;
    repeat (10) @(posedge clk);
    #1;
    checks++;
    if (!idle || words != 1000) begin failures++; $display("idle=%0b words=%0d", idle, words); end
    checks++;
    if (n_full_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
