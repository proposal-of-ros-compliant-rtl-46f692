// tb_memory_img -- self-checking test of the image line memory.
//
// Writes random 32-bit words to every word address, then reads every pixel address
// back (in random order and sequentially) and checks each 8-bit pixel against byte
// x%4 of the word written at x/4, one clock after the read address.
module tb_memory_img;
  import labeling_pkg::*;

  localparam int unsigned WORDS = 1024;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [9:0]  w_adr = '0;
  logic [11:0] r_adr = '0;
  word_t  wdata = '0;
  pixel_t rdata;
  int checks = 0, failures = 0;
  word_t model [WORDS];

  memory_img #(.WORDS(WORDS)) dut (.clk, .we, .w_adr, .wdata, .re, .r_adr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input int unsigned a);
    pixel_t exp;
    re <= 1; r_adr <= 12'(a);
    @(posedge clk);
    re <= 0;
    exp = model[a / 4][8*(a % 4) +: 8];
    #1;
    checks++;
    if (rdata !== exp) begin
      failures++;
      if (failures < 10) $display("pixel %0d: got %02h expected %02h", a, rdata, exp);
    end
  endtask

  initial begin
    @(posedge clk);
    for (int w = 0; w < WORDS; w++) begin
      model[w] = $urandom;
      we <= 1; w_adr <= 10'(w); wdata <= model[w];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 2000; i++) check_read($urandom_range(0, WORDS*4 - 1));
    for (int a = 0; a < 1920; a++) check_read(a);
    // data must hold while re is low
    check_read(5);
    repeat (3) @(posedge clk);
    checks++;
    if (rdata !== model[1][15:8]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
