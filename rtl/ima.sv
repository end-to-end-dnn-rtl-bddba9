// ima: the in-memory-computing accelerator of a cluster.
//
// Streamers move input vectors from L1 into a double-buffered input buffer; the analog
// array (DACs, 256x256 PCM crossbar, ADCs) multiplies one input vector by the stored weight
// matrix in 130 cycles; the result lands in a double-buffered output buffer and is streamed
// back to L1. The controller overlaps the three phases of consecutive jobs, so with short
// transfers a job finishes every 130 cycles. The IMA is a master of the cluster's L1
// crossbar through 16 word ports, is programmed by the cores through the peripheral register
// bus and pulses evt_done_o at the end of a run. The block structure is the described one
// (streamers, input buffer, DAC, array, ADC, output buffer, CTRL); sizes of buffers follow
// the array size.
// Lint note: rst_ni also appears in the 'disable iff' of its sub-blocks' assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module ima
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS    = IMA_ROWS,
  parameter int unsigned COLS    = IMA_COLS,
  parameter int unsigned LATENCY = IMA_ANALOG_LAT
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  cfg_req_t    cfg_req_i,
  output logic [31:0] cfg_rdata_o,
  output logic        evt_done_o,
  input  logic                    prog_valid_i,
  input  logic [$clog2(ROWS)-1:0] prog_row_i,
  input  logic [COLS*8-1:0]       prog_data_i,
  output tcdm_req_t [BEAT_WORDS-1:0] tcdm_req_o,
  input  tcdm_rsp_t [BEAT_WORDS-1:0] tcdm_rsp_i
);
  localparam int unsigned IWW = $clog2(ROWS/4);
  localparam int unsigned OWW = $clog2(COLS/4);

  logic [31:0] in_base, in_chunk_w, in_chunks, in_chunk_str, in_job_str;
  logic [31:0] out_base, out_words, out_job_str;
  logic        si_start, si_buf, si_done, so_start, so_buf, so_done;
  logic [31:0] si_job, so_job;
  logic        cp_start, cp_buf, cp_busy, cp_done;
  logic [$clog2(ROWS):0] n_rows;
  logic [4:0]  adc_shift;
  logic        ib_wr_en, ib_wr_sel;
  logic [IWW-1:0] ib_wr_word;
  logic [BEAT_WORDS-1:0] ib_wr_mask;
  logic [BEAT_WORDS-1:0][31:0] ib_wr_data, ob_rd_data;
  logic        ob_rd_sel;
  logic [OWW-1:0] ob_rd_word;
  logic [ROWS*8-1:0] in_vec;
  logic [COLS*8-1:0] out_vec;
  logic        cp_buf_q;   // output buffer of the MVM in flight

  ima_ctrl #(.ROWS(ROWS)) i_ctrl (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rdata_o, .evt_done_o,
    .in_base_o(in_base), .in_chunk_w_o(in_chunk_w), .in_chunks_o(in_chunks),
    .in_chunk_str_o(in_chunk_str), .in_job_str_o(in_job_str),
    .out_base_o(out_base), .out_words_o(out_words), .out_job_str_o(out_job_str),
    .si_start_o(si_start), .si_job_o(si_job), .si_buf_o(si_buf), .si_done_i(si_done),
    .so_start_o(so_start), .so_job_o(so_job), .so_buf_o(so_buf), .so_done_i(so_done),
    .cp_start_o(cp_start), .cp_buf_o(cp_buf), .n_rows_o(n_rows), .adc_shift_o(adc_shift),
    .cp_busy_i(cp_busy), .cp_done_i(cp_done)
  );

  ima_streamer #(.ROWS(ROWS), .COLS(COLS)) i_streamer (
    .clk_i, .rst_ni,
    .in_base_i(in_base), .in_chunk_w_i(in_chunk_w), .in_chunks_i(in_chunks),
    .in_chunk_str_i(in_chunk_str), .in_job_str_i(in_job_str),
    .out_base_i(out_base), .out_words_i(out_words), .out_job_str_i(out_job_str),
    .si_start_i(si_start), .si_job_i(si_job), .si_buf_i(si_buf), .si_done_o(si_done),
    .so_start_i(so_start), .so_job_i(so_job), .so_buf_i(so_buf), .so_done_o(so_done),
    .ib_wr_en_o(ib_wr_en), .ib_wr_sel_o(ib_wr_sel), .ib_wr_word_o(ib_wr_word),
    .ib_wr_mask_o(ib_wr_mask), .ib_wr_data_o(ib_wr_data),
    .ob_rd_sel_o(ob_rd_sel), .ob_rd_word_o(ob_rd_word), .ob_rd_data_i(ob_rd_data),
    .tcdm_req_o, .tcdm_rsp_i
  );

  ima_in_buffer #(.ROWS(ROWS)) i_in_buf (
    .clk_i, .wr_en_i(ib_wr_en), .wr_sel_i(ib_wr_sel), .wr_word_i(ib_wr_word),
    .wr_mask_i(ib_wr_mask), .wr_data_i(ib_wr_data), .rd_sel_i(cp_buf), .rd_vec_o(in_vec)
  );

  aimc_core #(.ROWS(ROWS), .COLS(COLS), .LATENCY(LATENCY)) i_array (
    .clk_i, .rst_ni, .prog_valid_i, .prog_row_i, .prog_data_i,
    .start_i(cp_start), .in_vec_i(in_vec), .n_rows_i(n_rows), .adc_shift_i(adc_shift),
    .busy_o(cp_busy), .done_o(cp_done), .out_vec_o(out_vec)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       cp_buf_q <= 1'b0;
    else if (cp_start) cp_buf_q <= cp_buf;
  end

  ima_out_buffer #(.COLS(COLS)) i_out_buf (
    .clk_i, .wr_en_i(cp_done), .wr_sel_i(cp_buf_q), .wr_vec_i(out_vec),
    .rd_sel_i(ob_rd_sel), .rd_word_i(ob_rd_word), .rd_data_o(ob_rd_data)
  );
endmodule
