// aimc_system: the massively parallel analog/digital system: clusters joined by a
// hierarchical AXI4 network that ends at the off-chip HBM.
//
// Four levels of router nodes group the clusters into quadrants. With the default quadrant
// factors (wrapper 8, L3 4, L2 4, L1 4) an L1 node joins 4 clusters, an L2 node 4 L1
// quadrants, an L3 node 4 L2 quadrants and the wrapper 8 L3 quadrants: 512 clusters. A
// final HBM-link node (quadrant factor 1) connects the wrapper to the HBM controller port
// hbm_req_o/hbm_rsp_i. Every link carries both directions (each cluster and each quadrant
// has a master and a slave side), so a cluster's DMA can write into another cluster's L1 as
// well as reach the HBM. Every node adds 4 cycles of latency and moves 64 bytes per beat.
// The RISC-V cores and the HBM controller are outside this RTL: per cluster, the cores'
// L1 ports, peripheral register bus and event-unit handshake are ports of this module, and a
// shared bus (prog_*) loads the IMA weights of one cluster at a time, standing in for the
// PCM programming path. Cluster c's L1 is at 0x8000_0000 + c * 1 MB; the HBM is at 0.
// Lint note: rst_ni also appears in the 'disable iff' of its sub-blocks' assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module aimc_system
  import aimc_pkg::*;
#(
  parameter int unsigned QF_WRAP    = 8,
  parameter int unsigned QF_L3      = 4,
  parameter int unsigned QF_L2      = 4,
  parameter int unsigned QF_L1      = 4,
  parameter int unsigned N_CLUSTERS = QF_WRAP * QF_L3 * QF_L2 * QF_L1,
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned N_BANKS    = 32,
  parameter int unsigned L1_BYTES   = 1 << L1_AW,
  parameter int unsigned IMA_R      = IMA_ROWS,
  parameter int unsigned IMA_C      = IMA_COLS,
  parameter int unsigned IMA_LAT    = IMA_ANALOG_LAT,
  parameter int unsigned NODE_LAT   = 4
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  tcdm_req_t [N_CORES-1:0]       core_req_i  [N_CLUSTERS],
  output tcdm_rsp_t [N_CORES-1:0]       core_rsp_o  [N_CLUSTERS],
  input  cfg_req_t                      cfg_req_i   [N_CLUSTERS],
  output logic [31:0]                   cfg_rdata_o [N_CLUSTERS],
  input  logic [N_CORES-1:0]            barrier_i   [N_CLUSTERS],
  input  logic [N_CORES-1:0]            wait_i      [N_CLUSTERS],
  input  logic [N_CORES-1:0][N_EVENTS-1:0] wait_mask_i [N_CLUSTERS],
  output logic [N_CORES-1:0]            wake_o      [N_CLUSTERS],
  output logic [N_CORES-1:0]            clk_en_o    [N_CLUSTERS],
  output logic [31:0]                   dispatch_o  [N_CLUSTERS],
  input  logic                          prog_valid_i,
  input  logic [$clog2(N_CLUSTERS+1)-1:0] prog_cluster_i,
  input  logic [$clog2(IMA_R)-1:0]      prog_row_i,
  input  logic [IMA_C*8-1:0]            prog_data_i,
  output axi_req_t                      hbm_req_o,
  input  axi_rsp_t                      hbm_rsp_i
);
  localparam int unsigned N1 = N_CLUSTERS / QF_L1;
  localparam int unsigned N2 = N1 / QF_L2;
  localparam int unsigned N3 = N2 / QF_L3;

  // cluster side
  axi_req_t cl_m_req [N_CLUSTERS];
  axi_rsp_t cl_m_rsp [N_CLUSTERS];
  axi_req_t cl_s_req [N_CLUSTERS];
  axi_rsp_t cl_s_rsp [N_CLUSTERS];
  // nodes: port index < QF is a child, port QF is the link up
  axi_req_t [QF_L1:0]   l1_s_req [N1];
  axi_rsp_t [QF_L1:0]   l1_s_rsp [N1];
  axi_req_t [QF_L1:0]   l1_m_req [N1];
  axi_rsp_t [QF_L1:0]   l1_m_rsp [N1];
  axi_req_t [QF_L2:0]   l2_s_req [N2];
  axi_rsp_t [QF_L2:0]   l2_s_rsp [N2];
  axi_req_t [QF_L2:0]   l2_m_req [N2];
  axi_rsp_t [QF_L2:0]   l2_m_rsp [N2];
  axi_req_t [QF_L3:0]   l3_s_req [N3];
  axi_rsp_t [QF_L3:0]   l3_s_rsp [N3];
  axi_req_t [QF_L3:0]   l3_m_req [N3];
  axi_rsp_t [QF_L3:0]   l3_m_rsp [N3];
  axi_req_t [QF_WRAP:0] wr_s_req, wr_m_req;
  axi_rsp_t [QF_WRAP:0] wr_s_rsp, wr_m_rsp;
  axi_req_t [1:0]       hl_s_req, hl_m_req;
  axi_rsp_t [1:0]       hl_s_rsp, hl_m_rsp;

  // ---------------- clusters ----------------
  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cl
    cluster #(
      .N_CORES(N_CORES), .N_BANKS(N_BANKS), .L1_BYTES(L1_BYTES),
      .IMA_R(IMA_R), .IMA_C(IMA_C), .IMA_LAT(IMA_LAT)
    ) i_cluster (
      .clk_i, .rst_ni,
      .core_req_i(core_req_i[c]), .core_rsp_o(core_rsp_o[c]),
      .cfg_req_i(cfg_req_i[c]), .cfg_rdata_o(cfg_rdata_o[c]),
      .barrier_i(barrier_i[c]), .wait_i(wait_i[c]), .wait_mask_i(wait_mask_i[c]),
      .wake_o(wake_o[c]), .clk_en_o(clk_en_o[c]), .dispatch_o(dispatch_o[c]),
      .prog_valid_i(prog_valid_i && prog_cluster_i == c), .prog_row_i, .prog_data_i,
      .axi_m_req_o(cl_m_req[c]), .axi_m_rsp_i(cl_m_rsp[c]),
      .axi_s_req_i(cl_s_req[c]), .axi_s_rsp_o(cl_s_rsp[c])
    );
    // child link of its L1 node
    assign l1_s_req[c / QF_L1][c % QF_L1] = cl_m_req[c];
    assign cl_m_rsp[c]                    = l1_s_rsp[c / QF_L1][c % QF_L1];
    assign cl_s_req[c]                    = l1_m_req[c / QF_L1][c % QF_L1];
    assign l1_m_rsp[c / QF_L1][c % QF_L1] = cl_s_rsp[c];
  end

  // ---------------- L1 nodes ----------------
  for (genvar n = 0; n < N1; n++) begin : g_l1
    axi_node #(.N_CHILD(QF_L1), .CL_FIRST(n * QF_L1), .CL_PER_CHILD(1), .LATENCY(NODE_LAT)) i_node (
      .clk_i, .rst_ni, .s_req_i(l1_s_req[n]), .s_rsp_o(l1_s_rsp[n]),
      .m_req_o(l1_m_req[n]), .m_rsp_i(l1_m_rsp[n]));
    assign l2_s_req[n / QF_L2][n % QF_L2] = l1_m_req[n][QF_L1];
    assign l1_m_rsp[n][QF_L1]             = l2_s_rsp[n / QF_L2][n % QF_L2];
    assign l1_s_req[n][QF_L1]             = l2_m_req[n / QF_L2][n % QF_L2];
    assign l2_m_rsp[n / QF_L2][n % QF_L2] = l1_s_rsp[n][QF_L1];
  end

  // ---------------- L2 nodes ----------------
  for (genvar n = 0; n < N2; n++) begin : g_l2
    axi_node #(.N_CHILD(QF_L2), .CL_FIRST(n * QF_L2 * QF_L1), .CL_PER_CHILD(QF_L1),
               .LATENCY(NODE_LAT)) i_node (
      .clk_i, .rst_ni, .s_req_i(l2_s_req[n]), .s_rsp_o(l2_s_rsp[n]),
      .m_req_o(l2_m_req[n]), .m_rsp_i(l2_m_rsp[n]));
    assign l3_s_req[n / QF_L3][n % QF_L3] = l2_m_req[n][QF_L2];
    assign l2_m_rsp[n][QF_L2]             = l3_s_rsp[n / QF_L3][n % QF_L3];
    assign l2_s_req[n][QF_L2]             = l3_m_req[n / QF_L3][n % QF_L3];
    assign l3_m_rsp[n / QF_L3][n % QF_L3] = l2_s_rsp[n][QF_L2];
  end

  // ---------------- L3 nodes ----------------
  for (genvar n = 0; n < N3; n++) begin : g_l3
    axi_node #(.N_CHILD(QF_L3), .CL_FIRST(n * QF_L3 * QF_L2 * QF_L1),
               .CL_PER_CHILD(QF_L2 * QF_L1), .LATENCY(NODE_LAT)) i_node (
      .clk_i, .rst_ni, .s_req_i(l3_s_req[n]), .s_rsp_o(l3_s_rsp[n]),
      .m_req_o(l3_m_req[n]), .m_rsp_i(l3_m_rsp[n]));
    assign wr_s_req[n]        = l3_m_req[n][QF_L3];
    assign l3_m_rsp[n][QF_L3] = wr_s_rsp[n];
    assign l3_s_req[n][QF_L3] = wr_m_req[n];
    assign wr_m_rsp[n]        = l3_s_rsp[n][QF_L3];
  end

  // ---------------- wrapper ----------------
  axi_node #(.N_CHILD(QF_WRAP), .CL_FIRST(0), .CL_PER_CHILD(QF_L3 * QF_L2 * QF_L1),
             .LATENCY(NODE_LAT)) i_wrapper (
    .clk_i, .rst_ni, .s_req_i(wr_s_req), .s_rsp_o(wr_s_rsp),
    .m_req_o(wr_m_req), .m_rsp_i(wr_m_rsp));

  // ---------------- HBM link ----------------
  assign hl_s_req[0]       = wr_m_req[QF_WRAP];
  assign wr_m_rsp[QF_WRAP] = hl_s_rsp[0];
  assign wr_s_req[QF_WRAP] = hl_m_req[0];
  assign hl_m_rsp[0]       = wr_s_rsp[QF_WRAP];

  axi_node #(.N_CHILD(1), .CL_FIRST(0), .CL_PER_CHILD(N_CLUSTERS), .LATENCY(NODE_LAT)) i_hbm_link (
    .clk_i, .rst_ni, .s_req_i(hl_s_req), .s_rsp_o(hl_s_rsp),
    .m_req_o(hl_m_req), .m_rsp_i(hl_m_rsp));

  // the HBM only answers; nothing comes from it
  assign hbm_req_o   = hl_m_req[1];
  assign hl_m_rsp[1] = hbm_rsp_i;
  assign hl_s_req[1] = '0;
endmodule
