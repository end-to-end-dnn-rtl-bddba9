// ima_ctrl: register file and job sequencer of the IMA (the CTRL block).
//
// A layer is run as N_JOBS jobs; each job is one MVM: stream-in of an input vector,
// compute (DAC, analog MVM, ADC) and stream-out of the output vector. With two input and two
// output buffers, job j+1 streams in and job j-1 streams out while job j computes: job j
// uses input buffer j%2 and output buffer j%2. Stream-in of job j may start once input
// buffer j%2 is free (the compute of job j-2 has ended), compute of job j once its input
// buffer is full, its output buffer is free and the analog array is idle, stream-out of job
// j once its output buffer is full. After the last stream-out the IMA event pulses. Writes to
// the registers while busy are ignored, except that reads always return the status. The
// three phases and the double buffering follow the described execution model; the
// register map and the exact hand-over rules are this design's.
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module ima_ctrl
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS = IMA_ROWS
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  cfg_req_t    cfg_req_i,
  output logic [31:0] cfg_rdata_o,
  output logic        evt_done_o,
  // configuration to the streamer
  output logic [31:0] in_base_o, in_chunk_w_o, in_chunks_o, in_chunk_str_o, in_job_str_o,
  output logic [31:0] out_base_o, out_words_o, out_job_str_o,
  // streamer control
  output logic        si_start_o,
  output logic [31:0] si_job_o,
  output logic        si_buf_o,
  input  logic        si_done_i,
  output logic        so_start_o,
  output logic [31:0] so_job_o,
  output logic        so_buf_o,
  input  logic        so_done_i,
  // analog array control
  output logic        cp_start_o,
  output logic        cp_buf_o,
  output logic [$clog2(ROWS):0] n_rows_o,
  output logic [4:0]  adc_shift_o,
  input  logic        cp_busy_i,
  input  logic        cp_done_i
);
  logic [31:0] n_jobs_q;
  logic [4:0]  shift_q;
  logic        busy_q;
  logic [31:0] si_cnt_q, cp_cnt_q, so_cnt_q;   // next job of each phase
  logic        si_busy_q, cp_busy_q, so_busy_q;
  logic [1:0]  in_full_q, out_full_q;

  wire wr = cfg_req_i.valid && cfg_req_i.we && !busy_q;

  logic [31:0] in_chunk_w_q, in_chunks_q;
  assign in_chunk_w_o = in_chunk_w_q;
  assign in_chunks_o  = in_chunks_q;

  always_comb begin
    si_start_o = busy_q && !si_busy_q && (si_cnt_q < n_jobs_q) && !in_full_q[si_cnt_q[0]];
    cp_start_o = busy_q && !cp_busy_q && !cp_busy_i && (cp_cnt_q < n_jobs_q)
                 && in_full_q[cp_cnt_q[0]] && !out_full_q[cp_cnt_q[0]];
    so_start_o = busy_q && !so_busy_q && (so_cnt_q < n_jobs_q) && out_full_q[so_cnt_q[0]];
    si_job_o   = si_cnt_q;
    si_buf_o   = si_cnt_q[0];
    so_job_o   = so_cnt_q;
    so_buf_o   = so_cnt_q[0];
    cp_buf_o   = cp_cnt_q[0];
    n_rows_o   = ($clog2(ROWS)+1)'(in_chunk_w_q * in_chunks_q * 4);
    adc_shift_o = shift_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      in_base_o <= '0; in_chunk_w_q <= 32'd1; in_chunks_q <= 32'd1; in_chunk_str_o <= '0;
      in_job_str_o <= '0; out_base_o <= '0; out_words_o <= 32'd1; out_job_str_o <= '0;
      n_jobs_q <= '0; shift_q <= '0; busy_q <= 1'b0; evt_done_o <= 1'b0;
      si_cnt_q <= '0; cp_cnt_q <= '0; so_cnt_q <= '0;
      si_busy_q <= 1'b0; cp_busy_q <= 1'b0; so_busy_q <= 1'b0;
      in_full_q <= '0; out_full_q <= '0;
    end else begin
      evt_done_o <= 1'b0;
      if (wr) begin
        unique case (cfg_req_i.addr[7:0])
          IMA_IN_BASE:      in_base_o      <= cfg_req_i.wdata;
          IMA_IN_CHUNK_W:   in_chunk_w_q   <= cfg_req_i.wdata;
          IMA_IN_CHUNKS:    in_chunks_q    <= cfg_req_i.wdata;
          IMA_IN_CHUNK_STR: in_chunk_str_o <= cfg_req_i.wdata;
          IMA_IN_JOB_STR:   in_job_str_o   <= cfg_req_i.wdata;
          IMA_OUT_BASE:     out_base_o     <= cfg_req_i.wdata;
          IMA_OUT_WORDS:    out_words_o    <= cfg_req_i.wdata;
          IMA_OUT_JOB_STR:  out_job_str_o  <= cfg_req_i.wdata;
          IMA_N_JOBS:       n_jobs_q       <= cfg_req_i.wdata;
          IMA_ADC_SHIFT:    shift_q        <= cfg_req_i.wdata[4:0];
          IMA_START: begin
            if (n_jobs_q == 0) evt_done_o <= 1'b1;
            else begin
              busy_q   <= 1'b1;
              si_cnt_q <= '0; cp_cnt_q <= '0; so_cnt_q <= '0;
              in_full_q <= '0; out_full_q <= '0;
            end
          end
          default: ;
        endcase
      end
      if (busy_q) begin
        // stream-in
        if (si_start_o) si_busy_q <= 1'b1;
        if (si_done_i) begin
          si_busy_q <= 1'b0;
          in_full_q[si_cnt_q[0]] <= 1'b1;
          si_cnt_q <= si_cnt_q + 1;
        end
        // compute
        if (cp_start_o) cp_busy_q <= 1'b1;
        if (cp_done_i && cp_busy_q) begin
          cp_busy_q <= 1'b0;
          in_full_q[cp_cnt_q[0]]  <= 1'b0;
          out_full_q[cp_cnt_q[0]] <= 1'b1;
          cp_cnt_q <= cp_cnt_q + 1;
        end
        // stream-out
        if (so_start_o) so_busy_q <= 1'b1;
        if (so_done_i) begin
          so_busy_q <= 1'b0;
          out_full_q[so_cnt_q[0]] <= 1'b0;
          so_cnt_q <= so_cnt_q + 1;
          if (so_cnt_q + 1 == n_jobs_q) begin
            busy_q     <= 1'b0;
            evt_done_o <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    unique case (cfg_req_i.addr[7:0])
      IMA_IN_BASE:      cfg_rdata_o = in_base_o;
      IMA_IN_CHUNK_W:   cfg_rdata_o = in_chunk_w_q;
      IMA_IN_CHUNKS:    cfg_rdata_o = in_chunks_q;
      IMA_N_JOBS:       cfg_rdata_o = n_jobs_q;
      IMA_STATUS:       cfg_rdata_o = {so_cnt_q[23:0], 7'h0, busy_q};
      default:          cfg_rdata_o = '0;
    endcase
  end

  // an input vector must fit the word lines, an output vector the output buffer
  a_rows: assert property (@(posedge clk_i) disable iff (!rst_ni)
    busy_q |-> (in_chunk_w_q * in_chunks_q * 4 <= ROWS));
endmodule
