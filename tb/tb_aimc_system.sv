// tb_aimc_system: end-to-end test of the whole accelerator on a reduced network.
//
// The top is built with 4 clusters (wrapper 2 x L3 1 x L2 1 x L1 2) and a 64 KB L1 per
// cluster; cores, IMA size (256x256), analog latency (130 cycles), node latency (4) are the
// defaults. The HBM is the AXI memory model with 100 cycles of latency. The test runs a
// two-layer pipeline the way the mapping of the described platform does it:
//   cluster 0: DMA in NJ input vectors from HBM -> IMA layer A -> DMA out of the results
//              straight into cluster 3's L1 (cluster-to-cluster through the network),
//   cluster 3: IMA layer B on those vectors -> DMA out to HBM,
// while clusters 1 and 2 copy a block HBM -> L1 -> HBM at the same time, so the HBM link
// and the wrapper are contended. The core 0 of clusters 0 and 3 sleeps in the event unit
// until each DMA/IMA event; the 16 cores of cluster 3 meet in a barrier at the end. All
// other cores keep issuing random loads/stores to their L1 during the run and check the
// data they read back. The final HBM contents are compared with a reference computed here.
// Every mechanism is counted and the test fails if one never happens: bank-conflict
// stalls, IMA stream/compute overlap, network contention, HBM traffic, cluster-to-cluster
// traffic, event wake-ups and the barrier.
module tb_aimc_system;
  import aimc_pkg::*;

  localparam int unsigned NC = 4;
  localparam int unsigned NCORE = 16;
  localparam int unsigned R = IMA_ROWS, C = IMA_COLS;
  localparam int unsigned NJ = 4;
  localparam int unsigned VB = 256;             // bytes per vector
  localparam logic [31:0] HBM_X   = 32'h0000_0000;
  localparam logic [31:0] HBM_Z   = 32'h0001_0000;
  localparam logic [31:0] HBM_CP  = 32'h0002_0000;
  localparam logic [31:0] HBM_CPO = 32'h0003_0000;
  localparam int unsigned CP_LEN  = 4096;
  localparam logic [31:0] L1_IN = 32'h1000, L1_OUT = 32'h4000, L1_CP = 32'h2000;

  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  tcdm_req_t [NCORE-1:0] core_req [NC];
  tcdm_rsp_t [NCORE-1:0] core_rsp [NC];
  cfg_req_t              cfg [NC];
  logic [31:0]           cfg_rdata [NC];
  logic [NCORE-1:0]      bar [NC], wt [NC], wake [NC], clk_en [NC];
  logic [NCORE-1:0][N_EVENTS-1:0] wmask [NC];
  logic [31:0]           disp [NC];
  logic                  prog_v;
  logic [2:0]            prog_cl;
  logic [7:0]            prog_row;
  logic [C*8-1:0]        prog_data;
  axi_req_t              hbm_req;
  axi_rsp_t              hbm_rsp;

  aimc_system #(.QF_WRAP(2), .QF_L3(1), .QF_L2(1), .QF_L1(2), .L1_BYTES(1 << 16)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_rsp_o(core_rsp), .cfg_req_i(cfg), .cfg_rdata_o(cfg_rdata),
    .barrier_i(bar), .wait_i(wt), .wait_mask_i(wmask), .wake_o(wake), .clk_en_o(clk_en),
    .dispatch_o(disp), .prog_valid_i(prog_v), .prog_cluster_i(prog_cl), .prog_row_i(prog_row),
    .prog_data_i(prog_data), .hbm_req_o(hbm_req), .hbm_rsp_i(hbm_rsp));

  axi_mem_model #(.LATENCY(100), .READY_PCT(80)) i_hbm (
    .clk_i(clk), .rst_ni(rst_n), .req_i(hbm_req), .rsp_o(hbm_rsp));

  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_core_stall = 0, n_overlap = 0, n_contention = 0, n_hbm_rd = 0, n_hbm_wr = 0;
  int n_c2c = 0, n_wake = 0, n_barrier = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++)
      for (int k = 1; k < NCORE; k++)
        if (core_req[c][k].req && !core_rsp[c][k].gnt) n_core_stall++;
    // IMA of cluster 0: analog array busy while the streamers move data
    if (dut.g_cl[0].i_cluster.i_ima.cp_busy && |dut.g_cl[0].i_cluster.i_ima.tcdm_req_o) n_overlap++;
    // an L3 subtree's request waits at the wrapper because the port is serving the other
    for (int i = 0; i < 2; i++)
      if ((dut.wr_s_req[i].ar_valid && !dut.wr_s_rsp[i].ar_ready) ||
          (dut.wr_s_req[i].aw_valid && !dut.wr_s_rsp[i].aw_ready)) n_contention++;
    if (hbm_req.ar_valid && hbm_rsp.ar_ready) n_hbm_rd++;
    if (hbm_req.aw_valid && hbm_rsp.aw_ready) n_hbm_wr++;
    if (dut.cl_s_req[3].aw_valid && dut.cl_s_rsp[3].aw_ready) n_c2c++;
  end
  always @(negedge clk) if (rst_n) begin
    n_wake += $countones(wake[0]) + $countones(wake[3]);
  end

  // ---------------- helpers ----------------
  task automatic cfg_write(int c, logic [3:0] p, logic [7:0] a, logic [31:0] d);
    cfg[c] = '{valid: 1'b1, we: 1'b1, addr: {p, a}, wdata: d};
    @(negedge clk); cfg[c] = '0;
  endtask

  task automatic sleep_until(int c, int evt);
    int t;
    wmask[c][0] = '0; wmask[c][0][evt] = 1'b1; wt[c][0] = 1'b1;
    @(negedge clk); wt[c][0] = 1'b0;
    t = 0;
    while (!wake[c][0] && t < 200000) begin @(negedge clk); t++; end
    checks++;
    if (!wake[c][0]) begin failures++; $display("cluster %0d core 0 never woke for event %0d", c, evt); end
  endtask

  task automatic ima_setup(int c);
    cfg_write(c, PERIPH_IMA, IMA_IN_BASE, L1_IN);   cfg_write(c, PERIPH_IMA, IMA_IN_CHUNK_W, VB / 4);
    cfg_write(c, PERIPH_IMA, IMA_IN_CHUNKS, 1);     cfg_write(c, PERIPH_IMA, IMA_IN_CHUNK_STR, VB);
    cfg_write(c, PERIPH_IMA, IMA_IN_JOB_STR, VB);   cfg_write(c, PERIPH_IMA, IMA_OUT_BASE, L1_OUT);
    cfg_write(c, PERIPH_IMA, IMA_OUT_WORDS, C / 4); cfg_write(c, PERIPH_IMA, IMA_OUT_JOB_STR, VB);
    cfg_write(c, PERIPH_IMA, IMA_N_JOBS, NJ);       cfg_write(c, PERIPH_IMA, IMA_ADC_SHIFT, 12);
  endtask

  task automatic dma_in(int c, logic [31:0] ext, logic [31:0] l1, int len);
    cfg_write(c, PERIPH_DMA, DMA_IN_EXT, ext); cfg_write(c, PERIPH_DMA, DMA_IN_L1, l1);
    cfg_write(c, PERIPH_DMA, DMA_IN_LEN, len); cfg_write(c, PERIPH_DMA, DMA_IN_START, 0);
  endtask

  task automatic dma_out(int c, logic [31:0] ext, logic [31:0] l1, int len);
    cfg_write(c, PERIPH_DMA, DMA_OUT_EXT, ext); cfg_write(c, PERIPH_DMA, DMA_OUT_L1, l1);
    cfg_write(c, PERIPH_DMA, DMA_OUT_LEN, len); cfg_write(c, PERIPH_DMA, DMA_OUT_START, 0);
  endtask

  function automatic logic [7:0] hbm_byte(logic [31:0] a);
    if (!i_hbm.mem.exists(a[31:6])) return 8'h00;
    return i_hbm.mem[a[31:6]][8*a[5:0] +: 8];
  endfunction

  function automatic logic [7:0] mvm(logic [7:0] x [VB], logic signed [7:0] w [R][C], int col);
    longint acc, q;
    acc = 0;
    for (int r = 0; r < R; r++) acc += longint'(x[r]) * longint'(w[r][col]);
    q = acc >>> 12;
    if (q > 127) q = 127; else if (q < -128) q = -128;
    return 8'(q);
  endfunction

  // ---------------- random core traffic (cores 1..15 of every cluster) ----------------
  bit traffic_on = 0;
  for (genvar c = 0; c < NC; c++) begin : g_tc
    for (genvar k = 1; k < NCORE; k++) begin : g_core
      logic [31:0] shadow [128];
      bit          valid [128];
      initial begin
        int i; bit rd; logic [31:0] d;
        for (int j = 0; j < 128; j++) valid[j] = 0;
        core_req[c][k] = '0;
        wait (traffic_on);
        while (traffic_on) begin
          @(negedge clk);
          if ($urandom_range(0, 2) != 0) continue;
          i = $urandom_range(0, 127);
          rd = valid[i] && $urandom_range(0, 1);
          d = $urandom;
          core_req[c][k] = '{req: 1'b1, we: !rd, be: 4'hF, addr: 32'h8000 + k * 512 + i * 4, wdata: d};
          @(posedge clk);
          while (!core_rsp[c][k].gnt) @(posedge clk);
          @(negedge clk); core_req[c][k] = '0;
          if (!core_rsp[c][k].rvalid) begin failures++; $display("no response on core %0d.%0d", c, k); end
          if (rd) begin
            checks++;
            if (core_rsp[c][k].rdata !== shadow[i]) begin
              failures++;
              if (failures < 5) $display("core %0d.%0d read %h expected %h", c, k, core_rsp[c][k].rdata, shadow[i]);
            end
          end else begin shadow[i] = d; valid[i] = 1; end
        end
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- main flow ----------------
  logic signed [7:0] wa [R][C], wb [R][C];
  logic [7:0] x [NJ][VB], y [NJ][VB], z;
  logic [7:0] cp [CP_LEN];
  initial begin
    int t0, bar_wait;
    for (int c = 0; c < NC; c++) begin
      cfg[c] = '0; bar[c] = '0; wt[c] = '0; wmask[c] = '0;
      core_req[c][0] = '0;
    end
    prog_v = 0; prog_cl = 0; prog_row = 0; prog_data = '0;
    // HBM contents
    for (int j = 0; j < NJ; j++)
      for (int b = 0; b < VB; b++) begin
        logic [31:0] a; x[j][b] = 8'($urandom); a = HBM_X + j * VB + b;
        if (!i_hbm.mem.exists(a[31:6])) i_hbm.mem[a[31:6]] = '0;
        i_hbm.mem[a[31:6]][8*a[5:0] +: 8] = x[j][b];
      end
    for (int b = 0; b < CP_LEN; b++) begin
      logic [31:0] a; cp[b] = 8'($urandom); a = HBM_CP + b;
      if (!i_hbm.mem.exists(a[31:6])) i_hbm.mem[a[31:6]] = '0;
      i_hbm.mem[a[31:6]][8*a[5:0] +: 8] = cp[b];
    end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // weights: layer A into cluster 0, layer B into cluster 3
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin wa[r][c] = 8'($urandom); wb[r][c] = 8'($urandom); end
    prog_v = 1;
    for (int r = 0; r < R; r++) begin
      prog_cl = 0; prog_row = 8'(r);
      for (int c = 0; c < C; c++) prog_data[8*c +: 8] = wa[r][c];
      @(negedge clk);
      prog_cl = 3;
      for (int c = 0; c < C; c++) prog_data[8*c +: 8] = wb[r][c];
      @(negedge clk);
    end
    prog_v = 0;
    traffic_on = 1;
    t0 = $time;

    fork
      begin : cl0_cl3
        dma_in(0, HBM_X, L1_IN, NJ * VB);
        sleep_until(0, EVT_DMA_IN);
        ima_setup(0); cfg_write(0, PERIPH_IMA, IMA_START, 0);
        sleep_until(0, EVT_IMA);
        dma_out(0, 32'h8000_0000 + (3 << L1_AW) + L1_IN, L1_OUT, NJ * VB);
        sleep_until(0, EVT_DMA_OUT);
        // cluster 0's DMA has finished writing cluster 3's L1; cluster 3 takes over
        ima_setup(3); cfg_write(3, PERIPH_IMA, IMA_START, 0);
        sleep_until(3, EVT_IMA);
        dma_out(3, HBM_Z, L1_OUT, NJ * VB);
        sleep_until(3, EVT_DMA_OUT);
      end
      begin : copies
        for (int c = 1; c <= 2; c++) dma_in(c, HBM_CP, L1_CP, CP_LEN);
        for (int c = 1; c <= 2; c++) sleep_until(c, EVT_DMA_IN);
        for (int c = 1; c <= 2; c++) dma_out(c, HBM_CPO + (c - 1) * CP_LEN, L1_CP, CP_LEN);
        for (int c = 1; c <= 2; c++) sleep_until(c, EVT_DMA_OUT);
      end
    join
    $display("pipeline finished after %0d cycles", ($time - t0) / 10);
    traffic_on = 0;
    repeat (10) @(negedge clk);

    // barrier of all cores of cluster 3
    cfg_write(3, PERIPH_EV, EV_BARRIER_MASK, 32'hFFFF);
    for (int k = 0; k < NCORE; k++) begin
      bar[3][k] = 1'b1; @(negedge clk); bar[3][k] = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      if (k < NCORE - 1) begin
        checks++; if (|wake[3]) begin failures++; $display("barrier released early"); end
      end
    end
    bar_wait = 0;
    while (!(&wake[3]) && bar_wait < 10) begin @(negedge clk); bar_wait++; end
    checks++;
    if (&wake[3]) n_barrier++; else begin failures++; $display("barrier never released"); end

    // results
    for (int j = 0; j < NJ; j++)
      for (int c = 0; c < C; c++) y[j][c] = mvm(x[j], wa, c);
    for (int j = 0; j < NJ; j++)
      for (int c = 0; c < C; c++) begin
        z = mvm(y[j], wb, c);
        checks++;
        if (hbm_byte(HBM_Z + j * VB + c) !== z) begin
          failures++;
          if (failures < 8) $display("job %0d col %0d: %h expected %h", j, c, hbm_byte(HBM_Z + j * VB + c), z);
        end
      end
    for (int c = 1; c <= 2; c++)
      for (int b = 0; b < CP_LEN; b++) begin
        checks++;
        if (hbm_byte(HBM_CPO + (c - 1) * CP_LEN + b) !== cp[b]) begin
          failures++;
          if (failures < 8) $display("copy %0d byte %0d wrong", c, b);
        end
      end

    $display("core stalls %0d, IMA overlap cycles %0d, contention cycles %0d, HBM reads %0d writes %0d",
             n_core_stall, n_overlap, n_contention, n_hbm_rd, n_hbm_wr);
    $display("cluster-to-cluster bursts %0d, wake-ups %0d, barriers %0d", n_c2c, n_wake, n_barrier);
    checks++; if (n_core_stall == 0) begin failures++; $display("no bank-conflict stall"); end
    checks++; if (n_overlap == 0)    begin failures++; $display("no IMA overlap"); end
    checks++; if (n_contention == 0) begin failures++; $display("no network contention"); end
    checks++; if (n_hbm_rd == 0 || n_hbm_wr == 0) begin failures++; $display("no HBM traffic"); end
    checks++; if (n_c2c == 0)        begin failures++; $display("no cluster-to-cluster traffic"); end
    checks++; if (n_wake < 5)        begin failures++; $display("too few wake-ups"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
