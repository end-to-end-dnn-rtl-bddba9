// ima_out_buffer: double-buffered output vector of the IMA.
//
// Two copies of a COLS-byte vector. The ADCs write one copy as a whole vector at the end of
// an MVM, while the streamer reads the other copy, 16 words at a time from a word index
// (words past the end read as zero). The double buffering follows the described IMA
// execution model; the port shapes are this design's choice.
module ima_out_buffer
  import aimc_pkg::*;
#(
  parameter int unsigned COLS = IMA_COLS,
  parameter int unsigned NW   = BEAT_WORDS,
  parameter int unsigned WIW  = $clog2(COLS/4)
) (
  input  logic                 clk_i,
  input  logic                 wr_en_i,
  input  logic                 wr_sel_i,
  input  logic [COLS*8-1:0]    wr_vec_i,
  input  logic                 rd_sel_i,
  input  logic [WIW-1:0]       rd_word_i,
  output logic [NW-1:0][31:0]  rd_data_o
);
  logic [1:0][COLS/4-1:0][31:0] buf_q;

  always_ff @(posedge clk_i) begin
    if (wr_en_i) buf_q[wr_sel_i] <= wr_vec_i;
  end

  always_comb begin
    for (int unsigned k = 0; k < NW; k++)
      rd_data_o[k] = ((int'(rd_word_i) + k) < COLS/4) ? buf_q[rd_sel_i][int'(rd_word_i) + k] : '0;
  end
endmodule
