// tb_label_data -- self-checking test of a label line buffer.
//
// Fills all 4096 entries with random labels, then reads them back in random order
// while writing new values to other addresses (simultaneous read and write, as in
// labeling), checking each read one clock after its address against a model array.
module tb_label_data;
  import labeling_pkg::*;

  localparam int unsigned DEPTH = 4096;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [11:0] w_adr = '0, r_adr = '0;
  label_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  label_t model [DEPTH];

  label_data #(.DEPTH(DEPTH)) dut (.clk, .we, .w_adr, .wdata, .re, .r_adr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ra, wa;
    label_t exp;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = label_t'($urandom);
      we <= 1; w_adr <= 12'(a); wdata <= model[a];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 6000; i++) begin
      ra = $urandom_range(0, DEPTH - 1);
      do wa = $urandom_range(0, DEPTH - 1); while (wa == ra);
      exp = model[ra];
      re <= 1; r_adr <= 12'(ra);
      we <= 1; w_adr <= 12'(wa); wdata <= label_t'($urandom);
      @(posedge clk);
      model[wa] = wdata;
      re <= 0; we <= 0;
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %0d expected %0d", ra, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
