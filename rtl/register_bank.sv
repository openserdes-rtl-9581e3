// register_bank: FIFO of oversampled words in the oversampling CDR.
//
// On each rising edge of the bit clock (phase 0) the OSR phase samples are
// moved into one word and pushed into a FIFO of DEPTH words; the oldest word
// drops out. Sample 0 was taken at the start of the period that just ended
// and samples 1..OSR-1 later in it, so each word holds the samples of one
// bit period in time order, sample 0 first; sample k-1 is never newer than
// sample k. Keeping the samples in FIFO registers follows the link
// description; the depth of 3 (what the decision logic reads) is this
// design's choice.
// Interface: words_o[0] is the newest word, words_o[DEPTH-1] the oldest.
// Latency: one bit clock from phase sample to words_o[0].
`timescale 1ps/1ps
module register_bank #(
  parameter int unsigned OSR   = serdes_pkg::OSR,
  parameter int unsigned DEPTH = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [OSR-1:0]            s_i,
  output logic [DEPTH-1:0][OSR-1:0] words_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words_o <= '0;
    end else begin
      words_o[0] <= s_i;
      for (int d = 1; d < DEPTH; d++) words_o[d] <= words_o[d-1];
    end
  end
endmodule
