// tb_cluster_dma: runs the output channel (L1 -> AXI memory) and the input channel (AXI
// memory -> L1) at the same time, against an L1 model with random bank stalls and an AXI
// memory with random back-pressure. Checks every word moved, the done events, that no
// burst crosses a 4 KB boundary or exceeds 16 beats, and the status register.
module tb_cluster_dma;
  import aimc_pkg::*;
  logic clk = 0, rst_n = 1;
  cfg_req_t cfg;
  logic [31:0] rdata;
  logic ev_in, ev_out;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  tcdm_req_t [2*BEAT_WORDS-1:0] treq;
  tcdm_rsp_t [2*BEAT_WORDS-1:0] trsp;
  int checks = 0, failures = 0, bursts = 0, in_events = 0, out_events = 0;
  localparam int LEN_OUT = 3072, LEN_IN = 2560;
  localparam logic [31:0] EXT_OUT = 32'h0000_2E00, EXT_IN = 32'h0001_0F80;
  localparam logic [31:0] L1_OUT = 32'h0000_0000, L1_IN = 32'h0000_4000;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg), .cfg_rdata_o(rdata),
    .evt_in_done_o(ev_in), .evt_out_done_o(ev_out), .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
    .tcdm_req_o(treq), .tcdm_rsp_i(trsp));
  tcdm_mem_model #(.NP(2*BEAT_WORDS), .WORDS(8192), .GNT_PCT(75)) i_l1 (.clk_i(clk), .req_i(treq), .rsp_o(trsp));
  axi_mem_model #(.LATENCY(20)) i_ext (.clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));
  always #5 clk = ~clk;

  task automatic cfg_write(logic [7:0] a, logic [31:0] d);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {PERIPH_DMA, a}, wdata: d};
    @(negedge clk); cfg = '0;
  endtask

  always @(posedge clk) begin
    if (ev_in) in_events++;
    if (ev_out) out_events++;
    if (axi_req.ar_valid && axi_rsp.ar_ready || axi_req.aw_valid && axi_rsp.aw_ready) begin
      axi_ax_t ax;
      ax = (axi_req.ar_valid && axi_rsp.ar_ready) ? axi_req.ar : axi_req.aw;
      bursts++;
      checks++;
      if ((ax.addr >> 12) != ((ax.addr + (ax.len + 1) * 64 - 1) >> 12) || ax.len > 15) begin
        failures++; $display("bad burst addr %h len %0d", ax.addr, ax.len);
      end
      if (axi_req.ar_valid && axi_rsp.ar_ready && axi_req.aw_valid && axi_rsp.aw_ready) bursts++;
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0;
    for (int i = 0; i < 8192; i++) i_l1.mem[i] = $urandom;
    for (int l = 0; l < LEN_IN / 64; l++) begin
      logic [AXI_DATA_W-1:0] line;
      for (int k = 0; k < 16; k++) line[32*k +: 32] = $urandom;
      i_ext.mem[(EXT_IN + 64*l) >> 6] = line;
    end
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    cfg_write(DMA_OUT_EXT, EXT_OUT); cfg_write(DMA_OUT_L1, L1_OUT); cfg_write(DMA_OUT_LEN, LEN_OUT);
    cfg_write(DMA_IN_EXT, EXT_IN);   cfg_write(DMA_IN_L1, L1_IN);   cfg_write(DMA_IN_LEN, LEN_IN);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {PERIPH_DMA, DMA_OUT_START}, wdata: 0}; @(negedge clk);
    cfg = '{valid: 1'b1, we: 1'b1, addr: {PERIPH_DMA, DMA_IN_START}, wdata: 0}; @(negedge clk);
    cfg = '{valid: 1'b1, we: 1'b0, addr: {PERIPH_DMA, DMA_STATUS}, wdata: 0}; #1;
    checks++; if (rdata[1:0] != 2'b11) begin failures++; $display("status %b, both channels should be busy", rdata[1:0]); end
    while (!(in_events == 1 && out_events == 1)) @(negedge clk);
    #1; checks++; if (rdata[1:0] != 2'b00) begin failures++; $display("status not idle"); end
    cfg = '0;
    repeat (5) @(negedge clk);
    // output channel result
    for (int w = 0; w < LEN_OUT / 4; w++) begin
      logic [31:0] got, exp;
      logic [31:0] a; a = EXT_OUT + 4*w;
      got = i_ext.mem.exists(a >> 6) ? i_ext.mem[a >> 6][32*((a >> 2) % 16) +: 32] : 32'hDEAD_BEEF;
      exp = i_l1.mem[(L1_OUT >> 2) + w];
      checks++; if (got !== exp) begin failures++; if (failures < 5) $display("out word %0d: %h vs %h", w, got, exp); end
    end
    // input channel result
    for (int w = 0; w < LEN_IN / 4; w++) begin
      logic [31:0] a; a = EXT_IN + 4*w;
      checks++;
      if (i_l1.mem[(L1_IN >> 2) + w] !== i_ext.mem[a >> 6][32*((a >> 2) % 16) +: 32]) begin
        failures++; if (failures < 5) $display("in word %0d wrong", w);
      end
    end
    checks++; if (in_events != 1 || out_events != 1) failures++;
    checks++; if (bursts != 8) begin failures++; $display("expected 8 bursts (4 KB splits), got %0d", bursts); end
    $display("bursts=%0d L1 stalls=%0d", bursts, i_l1.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
