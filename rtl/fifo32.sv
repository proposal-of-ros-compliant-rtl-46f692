// fifo32 -- 32-bit synchronous application FIFO.
//
// Stands between the host bridge and the labeling logic, once for the input image
// and once for the label results. Standard (not first-word-fall-through) read
// timing, like the FIFOs a Xilinx flow generates: dout carries the word popped by
// rd_en one clock later. Writes to a full FIFO and reads from an empty one are
// ignored (and flagged by assertions). The depth is this design's choice; the
// published design gives only the 32-bit width. Single clock domain.
module fifo32
  import labeling_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH   // power of two
) (
  input  logic  clk,
  input  logic  rst_n,
  // write side
  input  logic  wr_en,
  input  word_t din,
  output logic  full,
  // read side
  input  logic  rd_en,
  output word_t dout,
  output logic  empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t         mem [DEPTH];
  logic [AW:0]   w_ptr, r_ptr;   // one extra bit tells full from empty

  assign empty = (w_ptr == r_ptr);
  assign full  = (w_ptr[AW-1:0] == r_ptr[AW-1:0]) && (w_ptr[AW] != r_ptr[AW]);

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[w_ptr[AW-1:0]] <= din;
    if (rd_en && !empty) dout <= mem[r_ptr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_ptr <= '0;
      r_ptr <= '0;
    end else begin
      if (wr_en && !full)  w_ptr <= w_ptr + 1'b1;
      if (rd_en && !empty) r_ptr <= r_ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("fifo32: DEPTH must be a power of two");

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
