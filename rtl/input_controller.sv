// input_controller -- moves one image line from the input FIFO into memory_img.
//
// memory_img is used as two line slots of 512 words each (a full-HD line needs 480),
// so the next line can be loaded while the current one is being labeled. On `start`
// the controller pops WIDTH/4 32-bit words from the input FIFO, one per clock while
// the FIFO is not empty, and writes them to consecutive word addresses of the slot
// given by `slot` (word address = {slot, word index}). The FIFO has standard read
// timing, so the word popped in cycle t is written in cycle t+1. `done` pulses for
// one clock after the last word of the line has been written; `busy` is high from
// `start` until `done`.
// The published design names this controller and its connections (FIFO R_DATA/RE/
// EMPTY, memory_img w_adr and image data); the counter, the two slots and the
// start/done handshake are this design's own. img_wdata is the FIFO data passed on
// unchanged, as in the block diagram.
module input_controller
  import labeling_pkg::*;
#(
  parameter int unsigned WIDTH = IMG_WIDTH   // pixels per line, multiple of 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       slot,       // line slot of memory_img to fill
  output logic       busy,
  output logic       done,
  // input FIFO read side
  output logic       fifo_re,
  input  word_t      fifo_rdata,
  input  logic       fifo_empty,
  // memory_img write port
  output logic       img_we,
  output img_wadr_t  img_w_adr,
  output word_t      img_wdata
);

  localparam int unsigned WORDS = WIDTH / PIX_PER_WORD;
  localparam int unsigned IDX_W = $bits(img_wadr_t) - 1;

  logic [IDX_W:0]   rd_cnt;     // words popped so far (0..WORDS)
  logic [IDX_W-1:0] wr_idx;     // next word to write
  logic             slot_q;
  logic             pop_q;      // a word was popped last cycle

  assign fifo_re   = busy && (rd_cnt != (IDX_W+1)'(WORDS)) && !fifo_empty;
  assign img_we    = pop_q;
  assign img_w_adr = {slot_q, wr_idx};
  assign img_wdata = fifo_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      rd_cnt <= '0;
      wr_idx <= '0;
      slot_q <= 1'b0;
      pop_q  <= 1'b0;
    end else begin
      done  <= 1'b0;
      pop_q <= fifo_re;
      if (pop_q) wr_idx <= wr_idx + 1'b1;
      if (start && !busy) begin
        busy   <= 1'b1;
        rd_cnt <= '0;
        wr_idx <= '0;
        slot_q <= slot;
      end else if (busy) begin
        if (fifo_re) rd_cnt <= rd_cnt + 1'b1;
        // last word is being written this cycle
        if (pop_q && wr_idx == IDX_W'(WORDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  initial assert (WIDTH % PIX_PER_WORD == 0 && WIDTH / PIX_PER_WORD <= IMG_WORDS / 2)
    else $error("input_controller: WIDTH must be a multiple of 4 and fit half of memory_img");

endmodule
