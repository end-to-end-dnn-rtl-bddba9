// cluster: one heterogeneous analog/digital cluster.
//
// Sixteen RISC-V cores, the DMA (two 16-port channels), the AXI slave port (16 ports) and the
// IMA streamers (16 ports) share the banked 1 MB L1 scratchpad through one crossbar. The
// cores themselves are not part of this RTL: their data ports (core_req_i/core_rsp_o), their
// accesses to the peripheral registers (cfg_req_i, one shared register bus, decoded by
// addr[11:8] into event unit, DMA and IMA) and their event-unit handshake are ports of the
// cluster. The DMA is the cluster's AXI master (to other clusters and the HBM); the AXI
// slave port lets other clusters reach this L1. DMA and IMA done events go to the event
// unit, where the master core waits for them. Crossbar master order: cores 0..15, DMA
// input channel, DMA output channel, AXI slave port, IMA. The set of blocks follows the
// described cluster; bank count and port counts of DMA and slave port are this design's.
// Lint note: rst_ni also appears in the 'disable iff' of its sub-blocks' assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module cluster
  import aimc_pkg::*;
#(
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned N_BANKS    = 32,
  parameter int unsigned L1_BYTES   = 1 << L1_AW,
  parameter int unsigned IMA_R      = IMA_ROWS,
  parameter int unsigned IMA_C      = IMA_COLS,
  parameter int unsigned IMA_LAT    = IMA_ANALOG_LAT
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // cores
  input  tcdm_req_t [N_CORES-1:0]     core_req_i,
  output tcdm_rsp_t [N_CORES-1:0]     core_rsp_o,
  input  cfg_req_t                    cfg_req_i,
  output logic [31:0]                 cfg_rdata_o,
  input  logic [N_CORES-1:0]          barrier_i,
  input  logic [N_CORES-1:0]          wait_i,
  input  logic [N_CORES-1:0][N_EVENTS-1:0] wait_mask_i,
  output logic [N_CORES-1:0]          wake_o,
  output logic [N_CORES-1:0]          clk_en_o,
  output logic [31:0]                 dispatch_o,
  // IMA weight programming
  input  logic                        prog_valid_i,
  input  logic [$clog2(IMA_R)-1:0]    prog_row_i,
  input  logic [IMA_C*8-1:0]          prog_data_i,
  // AXI
  output axi_req_t                    axi_m_req_o,
  input  axi_rsp_t                    axi_m_rsp_i,
  input  axi_req_t                    axi_s_req_i,
  output axi_rsp_t                    axi_s_rsp_o
);
  localparam int unsigned N_MASTERS  = N_CORES + 4 * BEAT_WORDS;
  localparam int unsigned BANK_WORDS = L1_BYTES / 4 / N_BANKS;
  localparam int unsigned RW         = $clog2(BANK_WORDS);
  localparam int unsigned DMA0 = N_CORES;
  localparam int unsigned SLV0 = N_CORES + 2 * BEAT_WORDS;
  localparam int unsigned IMA0 = N_CORES + 3 * BEAT_WORDS;

  tcdm_req_t [N_MASTERS-1:0] x_req;
  tcdm_rsp_t [N_MASTERS-1:0] x_rsp;

  // ---------------- peripheral register bus ----------------
  cfg_req_t    ev_cfg, dma_cfg, ima_cfg;
  logic [31:0] ev_rdata, dma_rdata, ima_rdata;
  logic        evt_dma_in, evt_dma_out, evt_ima;

  always_comb begin
    ev_cfg  = cfg_req_i;  ev_cfg.valid  = cfg_req_i.valid && cfg_req_i.addr[11:8] == PERIPH_EV;
    dma_cfg = cfg_req_i;  dma_cfg.valid = cfg_req_i.valid && cfg_req_i.addr[11:8] == PERIPH_DMA;
    ima_cfg = cfg_req_i;  ima_cfg.valid = cfg_req_i.valid && cfg_req_i.addr[11:8] == PERIPH_IMA;
    unique case (cfg_req_i.addr[11:8])
      PERIPH_EV:  cfg_rdata_o = ev_rdata;
      PERIPH_DMA: cfg_rdata_o = dma_rdata;
      PERIPH_IMA: cfg_rdata_o = ima_rdata;
      default:    cfg_rdata_o = '0;
    endcase
  end

  // ---------------- event unit ----------------
  logic [N_EVENTS-1:0] hw_evt;
  always_comb begin
    hw_evt = '0;
    hw_evt[EVT_DMA_IN]  = evt_dma_in;
    hw_evt[EVT_DMA_OUT] = evt_dma_out;
    hw_evt[EVT_IMA]     = evt_ima;
  end

  event_unit #(.N_CORES(N_CORES)) i_ev (
    .clk_i, .rst_ni, .cfg_req_i(ev_cfg), .cfg_rdata_o(ev_rdata), .hw_evt_i(hw_evt),
    .barrier_i, .wait_i, .wait_mask_i, .wake_o, .clk_en_o, .dispatch_o
  );

  // ---------------- DMA ----------------
  cluster_dma i_dma (
    .clk_i, .rst_ni, .cfg_req_i(dma_cfg), .cfg_rdata_o(dma_rdata),
    .evt_in_done_o(evt_dma_in), .evt_out_done_o(evt_dma_out),
    .axi_req_o(axi_m_req_o), .axi_rsp_i(axi_m_rsp_i),
    .tcdm_req_o(x_req[DMA0 +: 2*BEAT_WORDS]), .tcdm_rsp_i(x_rsp[DMA0 +: 2*BEAT_WORDS])
  );

  // ---------------- AXI slave port ----------------
  axi_tcdm_slave i_slv (
    .clk_i, .rst_ni, .axi_req_i(axi_s_req_i), .axi_rsp_o(axi_s_rsp_o),
    .tcdm_req_o(x_req[SLV0 +: BEAT_WORDS]), .tcdm_rsp_i(x_rsp[SLV0 +: BEAT_WORDS])
  );

  // ---------------- IMA ----------------
  ima #(.ROWS(IMA_R), .COLS(IMA_C), .LATENCY(IMA_LAT)) i_ima (
    .clk_i, .rst_ni, .cfg_req_i(ima_cfg), .cfg_rdata_o(ima_rdata), .evt_done_o(evt_ima),
    .prog_valid_i, .prog_row_i, .prog_data_i,
    .tcdm_req_o(x_req[IMA0 +: BEAT_WORDS]), .tcdm_rsp_i(x_rsp[IMA0 +: BEAT_WORDS])
  );

  // ---------------- L1: crossbar and banks ----------------
  assign x_req[N_CORES-1:0] = core_req_i;
  assign core_rsp_o         = x_rsp[N_CORES-1:0];

  logic [N_BANKS-1:0]         b_req, b_we;
  logic [N_BANKS-1:0][3:0]    b_be;
  logic [N_BANKS-1:0][RW-1:0] b_addr;
  logic [N_BANKS-1:0][31:0]   b_wdata, b_rdata;

  tcdm_xbar #(.N_MASTERS(N_MASTERS), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS)) i_xbar (
    .clk_i, .rst_ni, .m_req_i(x_req), .m_rsp_o(x_rsp),
    .b_req_o(b_req), .b_we_o(b_we), .b_be_o(b_be), .b_addr_o(b_addr),
    .b_wdata_o(b_wdata), .b_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    l1_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b])
    );
  end
endmodule
