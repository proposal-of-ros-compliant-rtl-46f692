// label_data -- line buffer of label numbers ("label_data0" / "label_data1").
//
// A simple dual-port RAM of 8-bit labels, 4096 deep as in the block diagram
// ("8bit x 4096"). One write port and one synchronous read port: rdata holds the
// label at the r_adr of the last clock edge where re was high. Two instances are used
// in ping-pong: while the labeling cell writes the current line into one, it reads
// the previous line from the other; their roles swap every line.
module label_data
  import labeling_pkg::*;
#(
  parameter int unsigned DEPTH = LABEL_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] w_adr,
  input  label_t                   wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] r_adr,
  output label_t                   rdata
);

  label_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[w_adr] <= wdata;
    if (re) rdata <= mem[r_adr];
  end

endmodule
