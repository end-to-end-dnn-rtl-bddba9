// tb_ima: the whole IMA on an L1 model. Programs random weights, lays out a strided input
// feature map, runs 8 jobs (256 input rows gathered as 4 chunks of 16 words, 256 outputs)
// and checks every output byte in L1 against an independent integer MVM. Also checks the
// throughput that double buffering gives: 8 MVMs of 130 cycles finish within 8*130 cycles
// plus one stream-in and one stream-out, not 8 times the three phases in sequence.
module tb_ima;
  import aimc_pkg::*;
  localparam int NJ = 8, R = 256, C = 256;
  localparam logic [31:0] IN_BASE = 32'h0, CH_STR = 32'h400, IN_JSTR = 32'h40;
  localparam logic [31:0] OUT_BASE = 32'h8000, OUT_JSTR = 32'h100;
  logic clk = 0, rst_n = 1;
  cfg_req_t cfg; logic [31:0] rdata; logic evt;
  logic prog_v; logic [7:0] prog_row; logic [C*8-1:0] prog_data;
  tcdm_req_t [15:0] treq;
  tcdm_rsp_t [15:0] trsp;
  logic signed [7:0] w [R][C];
  int checks = 0, failures = 0, events = 0;

  ima dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg), .cfg_rdata_o(rdata), .evt_done_o(evt),
    .prog_valid_i(prog_v), .prog_row_i(prog_row), .prog_data_i(prog_data),
    .tcdm_req_o(treq), .tcdm_rsp_i(trsp));
  tcdm_mem_model #(.NP(16), .WORDS(16384), .GNT_PCT(90)) i_l1 (.clk_i(clk), .req_i(treq), .rsp_o(trsp));
  always #5 clk = ~clk;
  always @(posedge clk) if (evt) events++;

  task automatic cfg_write(logic [7:0] a, logic [31:0] d);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {PERIPH_IMA, a}, wdata: d};
    @(negedge clk); cfg = '0;
  endtask
  function automatic logic [7:0] l1_byte(logic [31:0] a);
    return i_l1.mem[a >> 2][8*(a%4) +: 8];
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, cycles;
    cfg = '0; prog_v = 0; prog_row = 0; prog_data = 0;
    for (int i = 0; i < 16384; i++) i_l1.mem[i] = $urandom;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < R; r++) begin
      prog_v = 1; prog_row = 8'(r);
      for (int c = 0; c < C; c++) begin w[r][c] = 8'($urandom); prog_data[8*c +: 8] = w[r][c]; end
      @(negedge clk);
    end
    prog_v = 0;
    cfg_write(IMA_IN_BASE, IN_BASE); cfg_write(IMA_IN_CHUNK_W, 16); cfg_write(IMA_IN_CHUNKS, 4);
    cfg_write(IMA_IN_CHUNK_STR, CH_STR); cfg_write(IMA_IN_JOB_STR, IN_JSTR);
    cfg_write(IMA_OUT_BASE, OUT_BASE); cfg_write(IMA_OUT_WORDS, 64); cfg_write(IMA_OUT_JOB_STR, OUT_JSTR);
    cfg_write(IMA_N_JOBS, NJ); cfg_write(IMA_ADC_SHIFT, 12);
    t0 = $time;
    cfg_write(IMA_START, 0);
    while (events == 0) @(negedge clk);
    cycles = ($time - t0) / 10;
    for (int j = 0; j < NJ; j++)
      for (int c = 0; c < C; c++) begin
        longint acc; longint q;
        acc = 0;
        for (int r = 0; r < R; r++)
          acc += longint'(l1_byte(IN_BASE + j*IN_JSTR + (r/64)*CH_STR + (r%64))) * longint'(w[r][c]);
        q = acc >>> 12;
        if (q > 127) q = 127; else if (q < -128) q = -128;
        checks++;
        if (l1_byte(OUT_BASE + j*OUT_JSTR + c) !== 8'(q)) begin
          failures++; if (failures < 5) $display("job %0d col %0d: %0d vs %0d", j, c, $signed(l1_byte(OUT_BASE + j*OUT_JSTR + c)), q);
        end
      end
    $display("%0d jobs in %0d cycles", NJ, cycles);
    checks++; if (cycles < NJ*IMA_ANALOG_LAT) begin failures++; $display("faster than the analog array allows"); end
    checks++; if (cycles > NJ*IMA_ANALOG_LAT + 120) begin failures++; $display("transfers not overlapped with compute"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
