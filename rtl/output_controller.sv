// output_controller -- writes the label results of a line into the output FIFO.
//
// It receives the labels of a finished line in order, one per clock at most
// (lab_valid / lab_data) -- while the next line is being labeled, or in the flush
// after the last line of a frame -- packs four consecutive labels into a 32-bit word (label x in byte x%4, the same
// order as the input pixels) and writes the word into the output FIFO when the FIFO
// is not full. A completed word that meets a full FIFO is held in a register and
// `ready` goes low; the sender (state_controller) issues a label read only while
// `ready` is high. Because a word completes only with its fourth label, one held
// word is all the buffering needed for a read latency of one clock. `idle` is high
// when nothing is in flight, i.e. every label received has reached the FIFO (a
// partial word only exists inside a line; lines are a multiple of 4 labels).
// The controller and its FIFO connections (W_DATA, WE, FULL) are from the published
// block diagram; packing four labels per word is this design's own choice.
module output_controller
  import labeling_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   lab_valid,
  input  label_t lab_data,
  output logic   ready,
  output logic   idle,
  // output FIFO write side
  output logic   fifo_we,
  output word_t  fifo_wdata,
  input  logic   fifo_full
);

  localparam int unsigned SEL_W = $clog2(PIX_PER_WORD);

  label_t           pack_q [PIX_PER_WORD-1];  // labels 0..2 of the word being built
  logic [SEL_W-1:0] cnt_q;                    // labels held in pack_q
  word_t            word_q;                   // completed word waiting for the FIFO
  logic             wvalid_q;

  word_t new_word;
  logic  word_done;

  always_comb begin
    new_word = '0;
    for (int i = 0; i < PIX_PER_WORD - 1; i++) new_word[i*LABEL_W +: LABEL_W] = pack_q[i];
    new_word[(PIX_PER_WORD-1)*LABEL_W +: LABEL_W] = lab_data;
    word_done = lab_valid && (cnt_q == SEL_W'(PIX_PER_WORD - 1));
    // a held word goes first; a word completing now goes straight through if it can
    if (wvalid_q) begin
      fifo_we    = !fifo_full;
      fifo_wdata = word_q;
    end else begin
      fifo_we    = word_done && !fifo_full;
      fifo_wdata = new_word;
    end
  end

  assign ready = !wvalid_q;
  assign idle  = !wvalid_q && (cnt_q == '0) && !lab_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q    <= '0;
      wvalid_q <= 1'b0;
      word_q   <= '0;
      for (int i = 0; i < PIX_PER_WORD - 1; i++) pack_q[i] <= '0;
    end else begin
      if (wvalid_q && !fifo_full) wvalid_q <= 1'b0;
      if (lab_valid) begin
        if (word_done) begin
          cnt_q <= '0;
          if (wvalid_q || fifo_full) begin
            word_q   <= new_word;
            wvalid_q <= 1'b1;
          end
        end else begin
          pack_q[cnt_q] <= lab_data;
          cnt_q         <= cnt_q + 1'b1;
        end
      end
    end
  end

  // A word can complete only while no earlier word is still held.
  a_no_word_loss: assert property (@(posedge clk) disable iff (!rst_n) !(word_done && wvalid_q));

endmodule
