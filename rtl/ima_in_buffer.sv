// ima_in_buffer: double-buffered input vector of the IMA.
//
// Two copies of a ROWS-byte vector. The streamer writes one copy, up to 16 words per cycle
// starting at a word index, while the DACs read the other copy as a whole vector. The
// double buffering follows the described IMA execution model; the word-wide write port is
// this design's choice. Contents are not reset: the controller only lets the DACs use rows
// that were written for the current job.
module ima_in_buffer
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS = IMA_ROWS,
  parameter int unsigned NW   = BEAT_WORDS,
  parameter int unsigned WIW  = $clog2(ROWS/4)
) (
  input  logic                 clk_i,
  input  logic                 wr_en_i,
  input  logic                 wr_sel_i,
  input  logic [WIW-1:0]       wr_word_i,
  input  logic [NW-1:0]        wr_mask_i,
  input  logic [NW-1:0][31:0]  wr_data_i,
  input  logic                 rd_sel_i,
  output logic [ROWS*8-1:0]    rd_vec_o
);
  logic [1:0][ROWS/4-1:0][31:0] buf_q;

  always_ff @(posedge clk_i) begin
    if (wr_en_i)
      for (int unsigned k = 0; k < NW; k++)
        if (wr_mask_i[k] && (int'(wr_word_i) + k) < ROWS/4)
          buf_q[wr_sel_i][int'(wr_word_i) + k] <= wr_data_i[k];
  end

  assign rd_vec_o = buf_q[rd_sel_i];
endmodule
