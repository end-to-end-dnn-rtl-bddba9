// aimc_pkg: types and constants shared by the analog/digital many-core system.
//
// The system is a grid of clusters, each with RISC-V cores, a banked L1 scratchpad (TCDM),
// a DMA, an event unit and an in-memory-computing accelerator (IMA) built around a
// 256x256 phase-change crossbar. Clusters talk through a tree of AXI4 router nodes that ends
// in the off-chip HBM. Sizes that come from the described platform: 64-byte AXI data path,
// 1 MB of L1 per cluster, 512 clusters, 1.5 GB of HBM. Everything else here is a choice of
// this implementation: the 32-bit word TCDM protocol (request granted in the same cycle,
// read data one cycle later), a 4-bit AXI ID, the memory map and the peripheral register
// bus used by the cores to program DMA, IMA and event unit.
package aimc_pkg;

  // ---------------- TCDM (L1) word protocol ----------------
  localparam int unsigned WORD_W  = 32;
  localparam int unsigned ADDR_W  = 32;
  localparam int unsigned L1_AW   = 20;            // 1 MB of L1 per cluster

  typedef struct packed {
    logic              req;
    logic              we;
    logic [3:0]        be;
    logic [ADDR_W-1:0] addr;   // byte address inside the cluster L1
    logic [WORD_W-1:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic              gnt;    // same cycle as req
    logic              rvalid; // one cycle after gnt (reads and writes)
    logic [WORD_W-1:0] rdata;
  } tcdm_rsp_t;

  // ---------------- AXI4 (64-byte data path) ----------------
  localparam int unsigned AXI_DATA_W = 512;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;
  localparam int unsigned BEAT_WORDS = AXI_DATA_W / WORD_W;   // 16 words per beat
  localparam int unsigned BEAT_BYTES = AXI_DATA_W / 8;        // 64 bytes per beat

  typedef enum logic [1:0] {BURST_FIXED = 2'b00, BURST_INCR = 2'b01, BURST_WRAP = 2'b10} axi_burst_e;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [ADDR_W-1:0]   addr;
    logic [7:0]          len;
    logic [2:0]          size;
    axi_burst_e          burst;
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic [AXI_STRB_W-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic [1:0]            resp;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw; logic aw_valid;
    axi_w_t  w;  logic w_valid;
    logic    b_ready;
    axi_ax_t ar; logic ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;  logic b_valid;
    logic   ar_ready;
    axi_r_t r;  logic r_valid;
  } axi_rsp_t;

  localparam logic [1:0] RESP_OKAY = 2'b00;

  // ---------------- global memory map ----------------
  // HBM at 0x0000_0000 (1.5 GB); cluster c's L1 at CLUSTER_BASE + c * 1 MB.
  localparam logic [ADDR_W-1:0] HBM_BASE     = 32'h0000_0000;
  localparam logic [ADDR_W-1:0] HBM_SIZE     = 32'h6000_0000;
  localparam logic [ADDR_W-1:0] CLUSTER_BASE = 32'h8000_0000;

  function automatic logic is_cluster_addr(logic [ADDR_W-1:0] a);
    return a[31] == 1'b1;
  endfunction

  function automatic int unsigned cluster_of(logic [ADDR_W-1:0] a);
    return int'(a[30:L1_AW]);
  endfunction

  // ---------------- peripheral register bus (cores -> DMA/IMA/EV) ----------------
  // Always ready; read data is combinational in the same cycle.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [11:0] addr;   // [11:8] selects the peripheral, [7:0] the byte offset
    logic [31:0] wdata;
  } cfg_req_t;

  localparam logic [3:0] PERIPH_EV  = 4'h0;
  localparam logic [3:0] PERIPH_DMA = 4'h1;
  localparam logic [3:0] PERIPH_IMA = 4'h2;

  // ---------------- IMA ----------------
  localparam int unsigned IMA_ROWS = 256;  // word lines
  localparam int unsigned IMA_COLS = 256;  // bit lines
  localparam int unsigned IMA_ANALOG_LAT = 130; // 130 ns MVM at 1 GHz

  // IMA register offsets
  localparam logic [7:0] IMA_IN_BASE      = 8'h00;
  localparam logic [7:0] IMA_IN_CHUNK_W   = 8'h04; // words per contiguous chunk
  localparam logic [7:0] IMA_IN_CHUNKS    = 8'h08; // chunks per input vector
  localparam logic [7:0] IMA_IN_CHUNK_STR = 8'h0C; // byte stride between chunks
  localparam logic [7:0] IMA_IN_JOB_STR   = 8'h10; // byte stride between jobs
  localparam logic [7:0] IMA_OUT_BASE     = 8'h14;
  localparam logic [7:0] IMA_OUT_WORDS    = 8'h18; // words per output vector
  localparam logic [7:0] IMA_OUT_JOB_STR  = 8'h1C;
  localparam logic [7:0] IMA_N_JOBS       = 8'h20;
  localparam logic [7:0] IMA_ADC_SHIFT    = 8'h24;
  localparam logic [7:0] IMA_START        = 8'h28;
  localparam logic [7:0] IMA_STATUS       = 8'h2C;

  // DMA register offsets
  localparam logic [7:0] DMA_IN_EXT    = 8'h00;
  localparam logic [7:0] DMA_IN_L1     = 8'h04;
  localparam logic [7:0] DMA_IN_LEN    = 8'h08;  // bytes, multiple of 64
  localparam logic [7:0] DMA_IN_START  = 8'h0C;
  localparam logic [7:0] DMA_OUT_EXT   = 8'h10;
  localparam logic [7:0] DMA_OUT_L1    = 8'h14;
  localparam logic [7:0] DMA_OUT_LEN   = 8'h18;
  localparam logic [7:0] DMA_OUT_START = 8'h1C;
  localparam logic [7:0] DMA_STATUS    = 8'h20;

  // Event unit register offsets and event lines
  localparam logic [7:0] EV_BARRIER_MASK = 8'h00; // cores taking part in the barrier
  localparam logic [7:0] EV_DISPATCH     = 8'h04; // write: dispatch value, wakes the team
  localparam logic [7:0] EV_SW_EVENT     = 8'h08; // write: raise software events
  localparam int unsigned N_EVENTS = 8;
  localparam int unsigned EVT_DMA_IN   = 0;
  localparam int unsigned EVT_DMA_OUT  = 1;
  localparam int unsigned EVT_IMA      = 2;
  localparam int unsigned EVT_DISPATCH = 3;
  localparam int unsigned EVT_SW0      = 4;     // 4..7 software events

endpackage
