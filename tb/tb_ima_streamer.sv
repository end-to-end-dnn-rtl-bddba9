// tb_ima_streamer: runs a stream-in (3 chunks of 12 words, strided, job 2, into input buffer
// 1) and a stream-out (40 words of output buffer 0, job 1) at the same time through the
// shared 16 ports, against an L1 model with random stalls. Checks what lands in the input
// buffer, what lands in L1, both done pulses, that the engines share the ports in turns,
// and that untouched L1 words stay unchanged.
module tb_ima_streamer;
  import aimc_pkg::*;
  logic clk = 0, rst_n = 1;
  localparam logic [31:0] IN_BASE = 32'h1000, CH_W = 12, CHUNKS = 3, CH_STR = 32'h100, IN_JSTR = 32'h40;
  localparam logic [31:0] OUT_BASE = 32'h4000, OUT_W = 40, OUT_JSTR = 32'hA0;
  logic si_start, si_done, so_start, so_done;
  logic ib_en, ib_sel, ob_sel;
  logic [5:0] ib_word, ob_word;
  logic [15:0] ib_mask;
  logic [15:0][31:0] ib_data, ob_data;
  tcdm_req_t [15:0] treq;
  tcdm_rsp_t [15:0] trsp;
  logic [1:0][63:0][31:0] ibuf, obuf;
  logic [31:0] mem0 [8192];
  int checks = 0, failures = 0, si_pulses = 0, so_pulses = 0, turns = 0;
  logic last_we;

  ima_streamer dut (.clk_i(clk), .rst_ni(rst_n),
    .in_base_i(IN_BASE), .in_chunk_w_i(CH_W), .in_chunks_i(CHUNKS), .in_chunk_str_i(CH_STR),
    .in_job_str_i(IN_JSTR), .out_base_i(OUT_BASE), .out_words_i(OUT_W), .out_job_str_i(OUT_JSTR),
    .si_start_i(si_start), .si_job_i(32'd2), .si_buf_i(1'b1), .si_done_o(si_done),
    .so_start_i(so_start), .so_job_i(32'd1), .so_buf_i(1'b0), .so_done_o(so_done),
    .ib_wr_en_o(ib_en), .ib_wr_sel_o(ib_sel), .ib_wr_word_o(ib_word), .ib_wr_mask_o(ib_mask),
    .ib_wr_data_o(ib_data), .ob_rd_sel_o(ob_sel), .ob_rd_word_o(ob_word), .ob_rd_data_i(ob_data),
    .tcdm_req_o(treq), .tcdm_rsp_i(trsp));
  tcdm_mem_model #(.NP(16), .WORDS(8192), .GNT_PCT(70)) i_l1 (.clk_i(clk), .req_i(treq), .rsp_o(trsp));
  always #5 clk = ~clk;

  always_comb for (int k = 0; k < 16; k++) ob_data[k] = (ob_word + k < 64) ? obuf[ob_sel][ob_word + k] : '0;
  always @(posedge clk) begin
    if (ib_en) for (int k = 0; k < 16; k++) if (ib_mask[k] && ib_word + k < 64) ibuf[ib_sel][ib_word + k] <= ib_data[k];
    if (si_done) si_pulses++;
    if (so_done) so_pulses++;
    if (treq[0].req) begin
      if (treq[0].we != last_we) turns++;
      last_we <= treq[0].we;
    end
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    si_start = 0; so_start = 0; ibuf = '0; last_we = 0;
    for (int i = 0; i < 8192; i++) begin i_l1.mem[i] = $urandom; mem0[i] = i_l1.mem[i]; end
    for (int w = 0; w < 64; w++) obuf[0][w] = $urandom;
    obuf[1] = '0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    si_start = 1; so_start = 1; @(negedge clk); si_start = 0; so_start = 0;
    while (!(si_pulses == 1 && so_pulses == 1)) @(negedge clk);
    repeat (3) @(negedge clk);
    // input buffer 1 holds the strided window of job 2
    for (int c = 0; c < CHUNKS; c++) for (int w = 0; w < CH_W; w++) begin
      int a; a = (IN_BASE + 2*IN_JSTR + c*CH_STR + 4*w) >> 2;
      checks++;
      if (ibuf[1][c*CH_W + w] !== mem0[a]) begin failures++; $display("ibuf word %0d wrong", c*CH_W + w); end
    end
    // output buffer 0 went to job 1's slot; nothing else changed
    for (int i = 0; i < 8192; i++) begin
      logic [31:0] exp; int o;
      o = i - ((OUT_BASE + OUT_JSTR) >> 2);
      exp = (o >= 0 && o < OUT_W) ? obuf[0][o] : mem0[i];
      checks++;
      if (i_l1.mem[i] !== exp) begin failures++; if (failures < 5) $display("L1 word %0d wrong", i); end
    end
    checks++; if (si_pulses != 1 || so_pulses != 1) failures++;
    checks++; if (turns < 2) begin failures++; $display("engines never shared the ports"); end
    $display("port hand-overs=%0d stalls=%0d", turns, i_l1.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
