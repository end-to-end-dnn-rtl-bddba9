// tcdm_xbar: crossbar between the masters of a cluster (cores, DMA, AXI slave port and
// IMA streamers) and the word-interleaved banks of the L1 scratchpad.
//
// Bank b holds the words whose address bits [BW+1:2] equal b (word interleaving), so
// consecutive words fall in different banks. Every bank has its own round-robin arbiter;
// a master whose bank is taken by another master sees gnt=0 and retries (a bank-conflict
// stall). A granted request reaches the bank in the same cycle; the bank's read data is
// returned to the master with rvalid in the following cycle. The single-cycle, per-bank
// arbitrated organisation is this design's choice: the platform only names the crossbar.
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module tcdm_xbar
  import aimc_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 4,
  parameter int unsigned N_BANKS    = 32,
  parameter int unsigned BANK_WORDS = 8192,
  parameter int unsigned BW         = $clog2(N_BANKS),
  parameter int unsigned RW         = $clog2(BANK_WORDS)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  tcdm_req_t [N_MASTERS-1:0] m_req_i,
  output tcdm_rsp_t [N_MASTERS-1:0] m_rsp_o,
  // bank side
  output logic [N_BANKS-1:0]          b_req_o,
  output logic [N_BANKS-1:0]          b_we_o,
  output logic [N_BANKS-1:0][3:0]     b_be_o,
  output logic [N_BANKS-1:0][RW-1:0]  b_addr_o,
  output logic [N_BANKS-1:0][31:0]    b_wdata_o,
  input  logic [N_BANKS-1:0][31:0]    b_rdata_i
);
  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;

  logic [N_MASTERS-1:0][BW-1:0] m_bank;
  logic [N_BANKS-1:0][N_MASTERS-1:0] bank_reqs;
  logic [N_BANKS-1:0]           bank_gv;
  logic [N_BANKS-1:0][MW-1:0]   bank_gidx;

  always_comb begin
    for (int unsigned m = 0; m < N_MASTERS; m++)
      m_bank[m] = m_req_i[m].addr[2 +: BW];
    for (int unsigned b = 0; b < N_BANKS; b++)
      for (int unsigned m = 0; m < N_MASTERS; m++)
        bank_reqs[b][m] = m_req_i[m].req && (m_bank[m] == BW'(b));
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    rr_arbiter #(.N(N_MASTERS)) i_arb (
      .clk_i, .rst_ni,
      .req_i      (bank_reqs[b]),
      .advance_i  (1'b1),
      .gnt_valid_o(bank_gv[b]),
      .gnt_idx_o  (bank_gidx[b])
    );
    always_comb begin
      b_req_o[b]   = bank_gv[b];
      b_we_o[b]    = m_req_i[bank_gidx[b]].we;
      b_be_o[b]    = m_req_i[bank_gidx[b]].be;
      b_addr_o[b]  = m_req_i[bank_gidx[b]].addr[2+BW +: RW];
      b_wdata_o[b] = m_req_i[bank_gidx[b]].wdata;
    end
  end

  // response routing: remember, per master, whether and where it was granted
  logic [N_MASTERS-1:0]         pend_q;
  logic [N_MASTERS-1:0][BW-1:0] pend_bank_q;
  logic [N_MASTERS-1:0]         gnt;

  always_comb begin
    for (int unsigned m = 0; m < N_MASTERS; m++)
      gnt[m] = bank_gv[m_bank[m]] && (bank_gidx[m_bank[m]] == MW'(m)) && m_req_i[m].req;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q      <= '0;
      pend_bank_q <= '0;
    end else begin
      pend_q      <= gnt;
      pend_bank_q <= m_bank;
    end
  end

  always_comb begin
    for (int unsigned m = 0; m < N_MASTERS; m++) begin
      m_rsp_o[m].gnt    = gnt[m];
      m_rsp_o[m].rvalid = pend_q[m];
      m_rsp_o[m].rdata  = b_rdata_i[pend_bank_q[m]];
    end
  end

  // a master's request must stay until granted: checked in the masters; here, a bank is
  // never granted to two masters
  for (genvar b = 0; b < N_BANKS; b++) begin : g_chk
    a_onegnt: assert property (@(posedge clk_i) disable iff (!rst_ni)
      $countones(bank_reqs[b] & gnt) <= 1);
  end
endmodule
