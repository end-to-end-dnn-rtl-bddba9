// ima_streamer: the IMA's streamers, moving data between L1 and the IMA buffers through
// 16 TCDM ports (the 16 read/write streamer ports of the described platform).
//
// Stream-in fills an input buffer with the input vector of job j. Its address generator walks
// a 2-D pattern: IN_CHUNKS chunks of IN_CHUNK_W contiguous words, chunk k starting at
// IN_BASE + j*IN_JOB_STR + k*IN_CHUNK_STR bytes (with an HWC feature map, a chunk is one
// kernel row of Kx*Cin bytes, so one job gathers one convolution window). Words go to the
// buffer in order. Stream-out writes the OUT_WORDS words of an output buffer to
// OUT_BASE + j*OUT_JOB_STR. Each engine moves up to 16 words per beat; a beat never crosses
// a chunk end. Both engines share the 16 ports; when both have a beat ready they take
// turns, one beat each. start pulses latch the job index and buffer; done pulses report
// the end. The address pattern and the sharing policy are this design's choices; the
// platform states only "programmable address generation".
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module ima_streamer
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS = IMA_ROWS,
  parameter int unsigned COLS = IMA_COLS,
  parameter int unsigned IWW  = $clog2(ROWS/4),
  parameter int unsigned OWW  = $clog2(COLS/4)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // configuration (stable while busy)
  input  logic [31:0]        in_base_i,
  input  logic [31:0]        in_chunk_w_i,
  input  logic [31:0]        in_chunks_i,
  input  logic [31:0]        in_chunk_str_i,
  input  logic [31:0]        in_job_str_i,
  input  logic [31:0]        out_base_i,
  input  logic [31:0]        out_words_i,
  input  logic [31:0]        out_job_str_i,
  // stream-in control
  input  logic               si_start_i,
  input  logic [31:0]        si_job_i,
  input  logic               si_buf_i,
  output logic               si_done_o,
  // stream-out control
  input  logic               so_start_i,
  input  logic [31:0]        so_job_i,
  input  logic               so_buf_i,
  output logic               so_done_o,
  // input buffer write port
  output logic               ib_wr_en_o,
  output logic               ib_wr_sel_o,
  output logic [IWW-1:0]     ib_wr_word_o,
  output logic [BEAT_WORDS-1:0]        ib_wr_mask_o,
  output logic [BEAT_WORDS-1:0][31:0]  ib_wr_data_o,
  // output buffer read port
  output logic               ob_rd_sel_o,
  output logic [OWW-1:0]     ob_rd_word_o,
  input  logic [BEAT_WORDS-1:0][31:0]  ob_rd_data_i,
  // L1
  output tcdm_req_t [BEAT_WORDS-1:0] tcdm_req_o,
  input  tcdm_rsp_t [BEAT_WORDS-1:0] tcdm_rsp_i
);
  // ---------------- stream-in engine ----------------
  logic        si_act_q, si_buf_q;
  logic [31:0] si_chunk_base_q, si_chunk_q, si_woff_q, si_bword_q;
  logic [31:0] si_n;                    // words in the current beat
  logic [BEAT_WORDS-1:0] si_mask;

  // ---------------- stream-out engine ----------------
  logic        so_act_q, so_buf_q;
  logic [31:0] so_base_q, so_woff_q, so_n;
  logic [BEAT_WORDS-1:0] so_mask;

  function automatic logic [BEAT_WORDS-1:0] first_n(logic [31:0] n);
    logic [BEAT_WORDS-1:0] m;
    for (int unsigned k = 0; k < BEAT_WORDS; k++) m[k] = (k < n);
    return m;
  endfunction

  always_comb begin
    si_n    = in_chunk_w_i - si_woff_q;
    if (si_n > BEAT_WORDS) si_n = BEAT_WORDS;
    si_mask = first_n(si_n);
    so_n    = out_words_i - so_woff_q;
    if (so_n > BEAT_WORDS) so_n = BEAT_WORDS;
    so_mask = first_n(so_n);
  end

  // ---------------- port sharing ----------------
  logic owner_valid_q, owner_q;   // owner 0: stream-in, 1: stream-out
  logic last_q;                   // engine served last
  logic cur_valid, cur;
  logic beat_done;
  logic [BEAT_WORDS-1:0][31:0] beat_rdata;

  always_comb begin
    cur_valid = owner_valid_q;
    cur       = owner_q;
    if (!owner_valid_q) begin
      if (si_act_q && so_act_q) begin cur_valid = 1'b1; cur = ~last_q; end
      else if (si_act_q)        begin cur_valid = 1'b1; cur = 1'b0;    end
      else if (so_act_q)        begin cur_valid = 1'b1; cur = 1'b1;    end
    end
  end

  tcdm_beat_port i_port (
    .clk_i, .rst_ni,
    .beat_valid_i (cur_valid),
    .beat_we_i    (cur),
    .beat_addr_i  (cur ? so_base_q + (so_woff_q << 2) : si_chunk_base_q + (si_woff_q << 2)),
    .beat_wmask_i (cur ? so_mask : si_mask),
    .beat_wdata_i (ob_rd_data_i),
    .beat_be_i    ('1),
    .beat_done_o  (beat_done),
    .beat_rdata_o (beat_rdata),
    .tcdm_req_o, .tcdm_rsp_i
  );

  assign ob_rd_sel_o  = so_buf_q;
  assign ob_rd_word_o = OWW'(so_woff_q);
  assign ib_wr_en_o   = beat_done && !cur;
  assign ib_wr_sel_o  = si_buf_q;
  assign ib_wr_word_o = IWW'(si_bword_q);
  assign ib_wr_mask_o = si_mask;
  assign ib_wr_data_o = beat_rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      si_act_q <= 1'b0; si_buf_q <= 1'b0; si_chunk_base_q <= '0; si_chunk_q <= '0;
      si_woff_q <= '0; si_bword_q <= '0; si_done_o <= 1'b0;
      so_act_q <= 1'b0; so_buf_q <= 1'b0; so_base_q <= '0; so_woff_q <= '0; so_done_o <= 1'b0;
      owner_valid_q <= 1'b0; owner_q <= 1'b0; last_q <= 1'b1;
    end else begin
      si_done_o <= 1'b0;
      so_done_o <= 1'b0;
      // ownership of the ports for the beat in flight
      if (beat_done) begin
        owner_valid_q <= 1'b0;
        last_q        <= cur;
      end else begin
        owner_valid_q <= cur_valid;
        owner_q       <= cur;
      end
      // stream-in
      if (si_start_i) begin
        si_act_q        <= 1'b1;
        si_buf_q        <= si_buf_i;
        si_chunk_base_q <= in_base_i + si_job_i * in_job_str_i;
        si_chunk_q      <= '0;
        si_woff_q       <= '0;
        si_bword_q      <= '0;
      end else if (beat_done && !cur) begin
        si_bword_q <= si_bword_q + si_n;
        if (si_woff_q + si_n >= in_chunk_w_i) begin
          si_woff_q       <= '0;
          si_chunk_q      <= si_chunk_q + 1;
          si_chunk_base_q <= si_chunk_base_q + in_chunk_str_i;
          if (si_chunk_q + 1 >= in_chunks_i) begin
            si_act_q  <= 1'b0;
            si_done_o <= 1'b1;
          end
        end else begin
          si_woff_q <= si_woff_q + si_n;
        end
      end
      // stream-out
      if (so_start_i) begin
        so_act_q  <= 1'b1;
        so_buf_q  <= so_buf_i;
        so_base_q <= out_base_i + so_job_i * out_job_str_i;
        so_woff_q <= '0;
      end else if (beat_done && cur) begin
        if (so_woff_q + so_n >= out_words_i) begin
          so_act_q  <= 1'b0;
          so_done_o <= 1'b1;
        end else begin
          so_woff_q <= so_woff_q + so_n;
        end
      end
    end
  end

  a_no_restart_si: assert property (@(posedge clk_i) disable iff (!rst_ni) si_start_i |-> !si_act_q);
  a_no_restart_so: assert property (@(posedge clk_i) disable iff (!rst_ni) so_start_i |-> !so_act_q);
endmodule
