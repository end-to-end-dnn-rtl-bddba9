// tb_ima_ctrl: the controller runs 7 jobs against a fake streamer (random stream-in and
// stream-out times) and a fake analog array (30-cycle MVM). An independent model of the two
// input and two output buffers checks every start: stream-in only into a free buffer,
// compute only on a full input buffer with a free output buffer and an idle array,
// stream-out only of a full output buffer, jobs in order. Also checks one done event at
// the end, that phases of different jobs overlapped, the configuration outputs and that
// register writes are ignored while busy.
module tb_ima_ctrl;
  import aimc_pkg::*;
  localparam int NJ = 7, LAT = 30;
  logic clk = 0, rst_n = 1;
  cfg_req_t cfg; logic [31:0] rdata; logic evt;
  logic [31:0] in_base, in_cw, in_ch, in_cs, in_js, out_base, out_w, out_js;
  logic si_start, si_buf, si_done, so_start, so_buf, so_done, cp_start, cp_buf, cp_busy, cp_done;
  logic [31:0] si_job, so_job;
  logic [8:0] n_rows; logic [4:0] shift;
  int checks = 0, failures = 0, events = 0, overlaps = 0;
  int si_next = 0, cp_next = 0, so_next = 0;
  bit in_full [2], out_full [2];
  int si_t = -1, so_t = -1, cp_t = -1;

  ima_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg), .cfg_rdata_o(rdata), .evt_done_o(evt),
    .in_base_o(in_base), .in_chunk_w_o(in_cw), .in_chunks_o(in_ch), .in_chunk_str_o(in_cs),
    .in_job_str_o(in_js), .out_base_o(out_base), .out_words_o(out_w), .out_job_str_o(out_js),
    .si_start_o(si_start), .si_job_o(si_job), .si_buf_o(si_buf), .si_done_i(si_done),
    .so_start_o(so_start), .so_job_o(so_job), .so_buf_o(so_buf), .so_done_i(so_done),
    .cp_start_o(cp_start), .cp_buf_o(cp_buf), .n_rows_o(n_rows), .adc_shift_o(shift),
    .cp_busy_i(cp_busy), .cp_done_i(cp_done));
  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cfg_write(logic [7:0] a, logic [31:0] d);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {PERIPH_IMA, a}, wdata: d};
    @(negedge clk); cfg = '0;
  endtask

  // fake streamer and array; rule checks at every start
  always @(posedge clk) begin
    si_done <= 0; so_done <= 0; cp_done <= 0;
    if (rst_n) begin
      if (si_start) begin
        check("stream-in job order", si_job == si_next);
        check("stream-in into a free buffer", !in_full[si_buf] && si_buf == si_job[0]);
        si_t <= 1 + $urandom % 40;
      end else if (si_t > 0) si_t <= si_t - 1;
      if (si_t == 1) begin si_done <= 1; in_full[si_next % 2] = 1; si_next++; end
      if (cp_start) begin
        check("compute job order", cp_next < si_next);
        check("compute on a full input buffer", in_full[cp_buf] && cp_buf == 1'(cp_next));
        check("compute into a free output buffer", !out_full[cp_buf]);
        check("array idle at compute start", !cp_busy);
        cp_t <= LAT;
      end else if (cp_t > 0) cp_t <= cp_t - 1;
      if (cp_t == 1) begin cp_done <= 1; in_full[cp_next % 2] = 0; out_full[cp_next % 2] = 1; cp_next++; end
      if (so_start) begin
        check("stream-out job order", so_job == so_next);
        check("stream-out of a full buffer", out_full[so_buf] && so_buf == so_job[0]);
        so_t <= 1 + $urandom % 40;
      end else if (so_t > 0) so_t <= so_t - 1;
      if (so_t == 1) begin so_done <= 1; out_full[so_next % 2] = 0; so_next++; end
      if ((si_t > 0) + (cp_t > 0) + (so_t > 0) >= 2) overlaps++;
      if (evt) events++;
    end
  end
  assign cp_busy = cp_t > 0;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; in_full = '{0, 0}; out_full = '{0, 0};
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    cfg_write(IMA_IN_BASE, 32'h100); cfg_write(IMA_IN_CHUNK_W, 8); cfg_write(IMA_IN_CHUNKS, 6);
    cfg_write(IMA_IN_CHUNK_STR, 32'h200); cfg_write(IMA_IN_JOB_STR, 32'h20);
    cfg_write(IMA_OUT_BASE, 32'h8000); cfg_write(IMA_OUT_WORDS, 48); cfg_write(IMA_OUT_JOB_STR, 32'hC0);
    cfg_write(IMA_N_JOBS, NJ); cfg_write(IMA_ADC_SHIFT, 9);
    check("config outputs", in_base == 32'h100 && in_cw == 8 && in_ch == 6 && in_cs == 32'h200 &&
          in_js == 32'h20 && out_base == 32'h8000 && out_w == 48 && out_js == 32'hC0 && shift == 9);
    check("rows used = 8*6*4", n_rows == 192);
    cfg_write(IMA_START, 0);
    cfg = '{valid: 1'b1, we: 1'b0, addr: {PERIPH_IMA, IMA_STATUS}, wdata: 0}; #1;
    check("busy after start", rdata[0] == 1'b1);
    cfg = '0;
    cfg_write(IMA_IN_BASE, 32'hDEAD);
    check("write ignored while busy", in_base == 32'h100);
    while (events == 0) @(negedge clk);
    check("all jobs streamed in", si_next == NJ);
    check("all jobs computed", cp_next == NJ);
    check("all jobs streamed out", so_next == NJ);
    cfg = '{valid: 1'b1, we: 1'b0, addr: {PERIPH_IMA, IMA_STATUS}, wdata: 0}; #1;
    check("idle after the last job", rdata[0] == 1'b0);
    cfg = '0;
    repeat (50) @(negedge clk);
    check("one done event", events == 1);
    check("phases overlapped (double buffering)", overlaps > 0);
    $display("overlap cycles=%0d", overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
