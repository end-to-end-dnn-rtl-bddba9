// tb_cluster: self-checking test of one cluster (L1, crossbar, event unit, DMA, IMA, AXI
// slave port) with a 64 KB L1 and otherwise default parameters.
//
// The cluster's AXI master port is connected to the AXI memory model (100 cycles latency).
// Core 0 programs the peripherals over the register bus and sleeps in the event unit until
// each done event: DMA in of NJ input vectors, IMA layer (256x256 weights loaded through the
// programming port), DMA out of the results. Cores 1..15 issue random loads/stores to their
// part of L1 all the time and check what they read back, so they collide with DMA and IMA
// on the banks. The testbench also writes one burst into L1 through the AXI slave port, reads
// it back with a core, and runs a dispatch and a 16-core barrier. Results in the memory model
// are compared with a reference MVM. Fails if no bank-conflict stall, no wake-up, or no
// stream/compute overlap was seen.
module tb_cluster;
  import aimc_pkg::*;

  localparam int unsigned NCORE = 16;
  localparam int unsigned R = IMA_ROWS, C = IMA_COLS;
  localparam int unsigned NJ = 4;
  localparam int unsigned VB = 256;
  localparam logic [31:0] EXT_X = 32'h0000_0000, EXT_Y = 32'h0001_0000;
  localparam logic [31:0] L1_IN = 32'h1000, L1_OUT = 32'h4000, L1_SL = 32'h6000;

  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  tcdm_req_t [NCORE-1:0] core_req;
  tcdm_rsp_t [NCORE-1:0] core_rsp;
  cfg_req_t              cfg;
  logic [31:0]           cfg_rdata;
  logic [NCORE-1:0]      bar, wt, wake, clk_en;
  logic [NCORE-1:0][N_EVENTS-1:0] wmask;
  logic [31:0]           disp;
  logic                  prog_v;
  logic [7:0]            prog_row;
  logic [C*8-1:0]        prog_data;
  axi_req_t              m_req, s_req;
  axi_rsp_t              m_rsp, s_rsp;

  cluster #(.L1_BYTES(1 << 16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(core_req), .core_rsp_o(core_rsp),
    .cfg_req_i(cfg), .cfg_rdata_o(cfg_rdata), .barrier_i(bar), .wait_i(wt), .wait_mask_i(wmask),
    .wake_o(wake), .clk_en_o(clk_en), .dispatch_o(disp), .prog_valid_i(prog_v),
    .prog_row_i(prog_row), .prog_data_i(prog_data), .axi_m_req_o(m_req), .axi_m_rsp_i(m_rsp),
    .axi_s_req_i(s_req), .axi_s_rsp_o(s_rsp));

  axi_mem_model #(.LATENCY(100), .READY_PCT(80)) i_ext (
    .clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .rsp_o(m_rsp));

  always #5 clk = ~clk;

  int n_stall = 0, n_overlap = 0, n_wake = 0;
  always @(posedge clk) if (rst_n) begin
    for (int k = 1; k < NCORE; k++) if (core_req[k].req && !core_rsp[k].gnt) n_stall++;
    if (dut.i_ima.cp_busy && |dut.i_ima.tcdm_req_o) n_overlap++;
  end
  always @(negedge clk) if (rst_n) n_wake += $countones(wake);

  task automatic cfg_write(logic [3:0] p, logic [7:0] a, logic [31:0] d);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {p, a}, wdata: d};
    @(negedge clk); cfg = '0;
  endtask

  task automatic sleep_until(int evt);
    int t;
    wmask[0] = '0; wmask[0][evt] = 1'b1; wt[0] = 1'b1;
    @(negedge clk); wt[0] = 1'b0;
    t = 0;
    while (!wake[0] && t < 100000) begin @(negedge clk); t++; end
    checks++;
    if (!wake[0]) begin failures++; $display("core 0 never woke for event %0d", evt); end
  endtask

  function automatic logic [7:0] ext_byte(logic [31:0] a);
    if (!i_ext.mem.exists(a[31:6])) return 8'h00;
    return i_ext.mem[a[31:6]][8*a[5:0] +: 8];
  endfunction

  // random traffic of cores 1..15
  bit traffic_on = 0;
  for (genvar k = 1; k < NCORE; k++) begin : g_core
    logic [31:0] shadow [128];
    bit          valid [128];
    initial begin
      int i; bit rd; logic [31:0] d;
      for (int j = 0; j < 128; j++) valid[j] = 0;
      core_req[k] = '0;
      wait (traffic_on);
      while (traffic_on) begin
        @(negedge clk);
        if ($urandom_range(0, 2) != 0) continue;
        i = $urandom_range(0, 127);
        rd = valid[i] && $urandom_range(0, 1);
        d = $urandom;
        core_req[k] = '{req: 1'b1, we: !rd, be: 4'hF, addr: 32'h8000 + k * 512 + i * 4, wdata: d};
        @(posedge clk);
        while (!core_rsp[k].gnt) @(posedge clk);
        @(negedge clk); core_req[k] = '0;
        if (!core_rsp[k].rvalid) begin failures++; $display("no response on core %0d", k); end
        if (rd) begin
          checks++;
          if (core_rsp[k].rdata !== shadow[i]) begin
            failures++;
            if (failures < 5) $display("core %0d read %h expected %h", k, core_rsp[k].rdata, shadow[i]);
          end
        end else begin shadow[i] = d; valid[i] = 1; end
      end
    end
  end

  initial begin
    #10000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic signed [7:0] w [R][C];
  logic [7:0] x [NJ][VB];
  logic [AXI_DATA_W-1:0] sl_line;
  initial begin
    int t;
    cfg = '0; bar = '0; wt = '0; wmask = '0; core_req[0] = '0; s_req = '0;
    prog_v = 0; prog_row = 0; prog_data = '0;
    for (int j = 0; j < NJ; j++)
      for (int b = 0; b < VB; b++) begin
        logic [31:0] a; x[j][b] = 8'($urandom); a = EXT_X + j * VB + b;
        if (!i_ext.mem.exists(a[31:6])) i_ext.mem[a[31:6]] = '0;
        i_ext.mem[a[31:6]][8*a[5:0] +: 8] = x[j][b];
      end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    prog_v = 1;
    for (int r = 0; r < R; r++) begin
      prog_row = 8'(r);
      for (int c = 0; c < C; c++) begin w[r][c] = 8'($urandom); prog_data[8*c +: 8] = w[r][c]; end
      @(negedge clk);
    end
    prog_v = 0;
    traffic_on = 1;

    // layer: DMA in, IMA, DMA out
    cfg_write(PERIPH_DMA, DMA_IN_EXT, EXT_X); cfg_write(PERIPH_DMA, DMA_IN_L1, L1_IN);
    cfg_write(PERIPH_DMA, DMA_IN_LEN, NJ * VB); cfg_write(PERIPH_DMA, DMA_IN_START, 0);
    sleep_until(EVT_DMA_IN);
    cfg_write(PERIPH_IMA, IMA_IN_BASE, L1_IN);   cfg_write(PERIPH_IMA, IMA_IN_CHUNK_W, VB / 4);
    cfg_write(PERIPH_IMA, IMA_IN_CHUNKS, 1);     cfg_write(PERIPH_IMA, IMA_IN_CHUNK_STR, VB);
    cfg_write(PERIPH_IMA, IMA_IN_JOB_STR, VB);   cfg_write(PERIPH_IMA, IMA_OUT_BASE, L1_OUT);
    cfg_write(PERIPH_IMA, IMA_OUT_WORDS, C / 4); cfg_write(PERIPH_IMA, IMA_OUT_JOB_STR, VB);
    cfg_write(PERIPH_IMA, IMA_N_JOBS, NJ);       cfg_write(PERIPH_IMA, IMA_ADC_SHIFT, 12);
    cfg_write(PERIPH_IMA, IMA_START, 0);
    sleep_until(EVT_IMA);
    cfg_write(PERIPH_DMA, DMA_OUT_EXT, EXT_Y); cfg_write(PERIPH_DMA, DMA_OUT_L1, L1_OUT);
    cfg_write(PERIPH_DMA, DMA_OUT_LEN, NJ * VB); cfg_write(PERIPH_DMA, DMA_OUT_START, 0);
    sleep_until(EVT_DMA_OUT);

    // one burst of 2 beats into L1 through the slave port
    sl_line = {16{$urandom}};
    for (int i = 0; i < 16; i++) sl_line[32*i +: 32] = $urandom;
    s_req.aw = '{id: 4'h3, addr: 32'h8000_0000 + L1_SL, len: 8'd1, size: 3'd6, burst: BURST_INCR};
    s_req.aw_valid = 1'b1;
    t = 0;
    @(posedge clk); while (!s_rsp.aw_ready && t < 1000) begin @(posedge clk); t++; end
    @(negedge clk); s_req.aw_valid = 1'b0;
    for (int b = 0; b < 2; b++) begin
      s_req.w = '{data: b ? ~sl_line : sl_line, strb: '1, last: b == 1};
      s_req.w_valid = 1'b1;
      t = 0;
      @(posedge clk); while (!s_rsp.w_ready && t < 1000) begin @(posedge clk); t++; end
      @(negedge clk); s_req.w_valid = 1'b0;
    end
    s_req.b_ready = 1'b1;
    t = 0;
    while (!s_rsp.b_valid && t < 1000) begin @(negedge clk); t++; end
    checks++; if (!s_rsp.b_valid) begin failures++; $display("no B response on the slave port"); end
    @(negedge clk); s_req.b_ready = 1'b0;
    traffic_on = 0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      logic [31:0] e;
      e = i < 16 ? sl_line[32*i +: 32] : ~sl_line[32*(i-16) +: 32];
      core_req[1] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: L1_SL + 4 * i, wdata: 0};
      @(posedge clk); while (!core_rsp[1].gnt) @(posedge clk);
      @(negedge clk); core_req[1] = '0;
      checks++;
      if (core_rsp[1].rdata !== e) begin failures++; $display("slave word %0d: %h vs %h", i, core_rsp[1].rdata, e); end
    end

    // dispatch wakes the sleeping team, then a barrier of all 16 cores
    for (int k = 0; k < NCORE; k++) begin wmask[k] = '0; wmask[k][EVT_DISPATCH] = 1'b1; end
    wt = '1; @(negedge clk); wt = '0;
    cfg_write(PERIPH_EV, EV_DISPATCH, 32'hCAFE_0040);
    t = 0; while (!(&wake) && t < 10) begin @(negedge clk); t++; end
    checks++; if (!(&wake) || disp !== 32'hCAFE_0040) begin failures++; $display("dispatch failed"); end
    @(negedge clk);
    cfg_write(PERIPH_EV, EV_BARRIER_MASK, 32'hFFFF);
    for (int k = 0; k < NCORE; k++) begin
      bar[k] = 1'b1; @(negedge clk); bar[k] = 1'b0;
      if (k < NCORE - 1) begin checks++; if (|wake) begin failures++; $display("barrier released early"); end end
    end
    t = 0; while (!(&wake) && t < 10) begin @(negedge clk); t++; end
    checks++; if (!(&wake)) begin failures++; $display("barrier never released"); end

    // results
    for (int j = 0; j < NJ; j++)
      for (int c = 0; c < C; c++) begin
        longint acc, q;
        acc = 0;
        for (int r = 0; r < R; r++) acc += longint'(x[j][r]) * longint'(w[r][c]);
        q = acc >>> 12;
        if (q > 127) q = 127; else if (q < -128) q = -128;
        checks++;
        if (ext_byte(EXT_Y + j * VB + c) !== 8'(q)) begin
          failures++;
          if (failures < 8) $display("job %0d col %0d: %h expected %h", j, c, ext_byte(EXT_Y + j * VB + c), 8'(q));
        end
      end
    $display("stalls %0d, overlap %0d, wake-ups %0d", n_stall, n_overlap, n_wake);
    checks++; if (n_stall == 0)   begin failures++; $display("no bank-conflict stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no IMA overlap"); end
    checks++; if (n_wake < 3)     begin failures++; $display("no wake-ups"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
