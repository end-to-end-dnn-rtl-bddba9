// event_unit: the cluster's hardware synchronizer (barriers, thread dispatch, event wait).
//
// Each core has a pending-event register. Event lines from the DMA channels and the IMA,
// dispatch and software events set bits in it. A core that wants to sleep pulses
// wait_i with a mask: its clock enable drops until one of the masked events is pending;
// then wake_o pulses, clk_en_o returns high and the masked pending bits are cleared.
// This is how the master core (CORE0) waits for "input DMA, output DMA and IMA done".
// A core that pulses barrier_i also sleeps; when every core in the barrier mask has
// arrived, all of them are woken in the same cycle. A register write to EV_DISPATCH
// stores a value (e.g. a function pointer) and raises the dispatch event in every core.
// Register reads are combinational. The described platform gives only the function
// (dispatch, barriers, waiting for DMA/IMA events); the register map and the wait
// protocol are this design's.
// Lint note: the sequential process computes a few per-cycle temporaries with blocking
// assignments to variables local to that process; they are not flops and are not read
// outside it, so the blocking/non-blocking mix there is intended.
module event_unit
  import aimc_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  cfg_req_t                    cfg_req_i,   // peripheral-local offset in addr[7:0]
  output logic [31:0]                 cfg_rdata_o,
  input  logic [N_EVENTS-1:0]         hw_evt_i,    // single-cycle pulses
  input  logic [N_CORES-1:0]          barrier_i,
  input  logic [N_CORES-1:0]          wait_i,
  input  logic [N_CORES-1:0][N_EVENTS-1:0] wait_mask_i,
  output logic [N_CORES-1:0]          wake_o,
  output logic [N_CORES-1:0]          clk_en_o,
  output logic [31:0]                 dispatch_o
);
  logic [N_CORES-1:0]               bar_mask_q, arrived_q, in_wait_q;
  logic [N_CORES-1:0][N_EVENTS-1:0] pend_q, mask_q;
  logic [31:0]                      dispatch_q;
  logic [N_EVENTS-1:0]              evt_all;
  logic                             bar_release;
  logic [N_CORES-1:0]               arrived_n;

  wire wr = cfg_req_i.valid && cfg_req_i.we;

  always_comb begin
    evt_all = hw_evt_i;
    if (wr && cfg_req_i.addr[7:0] == EV_DISPATCH) evt_all[EVT_DISPATCH] = 1'b1;
    if (wr && cfg_req_i.addr[7:0] == EV_SW_EVENT) evt_all[N_EVENTS-1:EVT_SW0] |= cfg_req_i.wdata[N_EVENTS-EVT_SW0-1:0];
    arrived_n   = arrived_q | barrier_i;
    bar_release = (bar_mask_q != '0) && ((arrived_n & bar_mask_q) == bar_mask_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bar_mask_q <= '1;
      arrived_q  <= '0;
      in_wait_q  <= '0;
      pend_q     <= '0;
      mask_q     <= '0;
      dispatch_q <= '0;
      wake_o     <= '0;
    end else begin
      if (wr && cfg_req_i.addr[7:0] == EV_BARRIER_MASK) bar_mask_q <= cfg_req_i.wdata[N_CORES-1:0];
      if (wr && cfg_req_i.addr[7:0] == EV_DISPATCH)     dispatch_q <= cfg_req_i.wdata;
      arrived_q <= bar_release ? '0 : arrived_n;
      for (int unsigned c = 0; c < N_CORES; c++) begin
        logic [N_EVENTS-1:0] p;
        logic                w;
        logic [N_EVENTS-1:0] m;
        p = pend_q[c] | evt_all;
        w = in_wait_q[c] | wait_i[c];
        m = wait_i[c] ? wait_mask_i[c] : mask_q[c];
        wake_o[c] = 1'b0;
        if (w && (p & m) != '0) begin
          p &= ~m;
          w = 1'b0;
          wake_o[c] = 1'b1;
        end
        if (bar_release && arrived_n[c] && bar_mask_q[c]) wake_o[c] = 1'b1;
        pend_q[c]    <= p;
        in_wait_q[c] <= w;
        mask_q[c]    <= m;
      end
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < N_CORES; c++)
      clk_en_o[c] = !(in_wait_q[c] || (arrived_q[c] && bar_mask_q[c]));
    dispatch_o = dispatch_q;
    unique case (cfg_req_i.addr[7:0])
      EV_BARRIER_MASK: cfg_rdata_o = 32'(bar_mask_q);
      EV_DISPATCH:     cfg_rdata_o = dispatch_q;
      default:         cfg_rdata_o = '0;
    endcase
  end
endmodule
