// axi_node: one router of the hierarchical AXI4 network (an L1, L2, L3, wrapper or HBM-link
// node).
//
// A node joins N_CHILD quadrants below it (clusters, or nodes of the level below) and one
// link upwards. Every link has a master and a slave side, so a transaction can be started
// by anyone below or above: ports 0..N_CHILD-1 face the children, port N_CHILD faces up.
// The subtree of child k holds clusters CL_FIRST + k*CL_PER_CHILD ... +CL_PER_CHILD-1; an
// address in one of those clusters' L1 windows goes down to child k, any other address
// (another subtree, the HBM) goes up. Each output port serves one write burst and one read
// burst at a time, chosen round-robin among the requesting inputs; the address is held
// LATENCY cycles in the node before it is issued (the 4-cycle node latency of the described
// platform), then the W beats, B response and R beats pass straight through between the two
// ports. An input has at most one write and one read in flight. Data is 64 bytes wide.
// The topology, widths and latency follow the described platform; the one-burst-per-port
// arbitration is this design's simplification.
// Lint note: the ports are packed arrays of request/response structs, so a simulator that
// treats each port array as one vector reports a combinational loop between a node and its
// neighbours (ready depends on valid of another field of the same vector). There is no real
// loop: every ready is a function of the node's registered state and of valids only.
// CL_FIRST is 0 for the left-most node of each level, which makes the lower-bound test of the
// routing function constant there; it is kept so that all nodes share one routing rule.
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module axi_node
  import aimc_pkg::*;
#(
  parameter int unsigned N_CHILD      = 4,
  parameter int unsigned CL_FIRST     = 0,
  parameter int unsigned CL_PER_CHILD = 1,
  parameter int unsigned LATENCY      = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  axi_req_t [N_CHILD:0]  s_req_i,   // requests arriving at the node
  output axi_rsp_t [N_CHILD:0]  s_rsp_o,
  output axi_req_t [N_CHILD:0]  m_req_o,   // requests leaving the node
  input  axi_rsp_t [N_CHILD:0]  m_rsp_i
);
  localparam int unsigned NP = N_CHILD + 1;
  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;

  typedef enum logic [2:0] {X_IDLE, X_DELAY, X_ADDR, X_DATA, X_RESP} xs_e;

  function automatic logic [PW-1:0] route(logic [ADDR_W-1:0] a);
    int unsigned c;
    c = cluster_of(a);
    if (is_cluster_addr(a) && c >= CL_FIRST && c < CL_FIRST + N_CHILD * CL_PER_CHILD)
      return PW'((c - CL_FIRST) / CL_PER_CHILD);
    return PW'(N_CHILD);
  endfunction

  xs_e     [NP-1:0]          w_st_q, r_st_q;
  logic    [NP-1:0][PW-1:0]  w_own_q, r_own_q;
  axi_ax_t [NP-1:0]          aw_q, ar_q;
  logic    [NP-1:0][7:0]     w_cnt_q, r_cnt_q;
  logic    [NP-1:0]          in_w_busy_q, in_r_busy_q;

  logic [NP-1:0][NP-1:0]     aw_reqs, ar_reqs;
  logic [NP-1:0]             aw_gv, ar_gv;
  logic [NP-1:0][PW-1:0]     aw_gi, ar_gi;

  always_comb begin
    for (int unsigned m = 0; m < NP; m++)
      for (int unsigned s = 0; s < NP; s++) begin
        aw_reqs[m][s] = s_req_i[s].aw_valid && !in_w_busy_q[s] && route(s_req_i[s].aw.addr) == PW'(m);
        ar_reqs[m][s] = s_req_i[s].ar_valid && !in_r_busy_q[s] && route(s_req_i[s].ar.addr) == PW'(m);
      end
  end

  for (genvar m = 0; m < NP; m++) begin : g_out
    rr_arbiter #(.N(NP), .IW(PW)) i_aw_arb (
      .clk_i, .rst_ni, .req_i(aw_reqs[m]), .advance_i(w_st_q[m] == X_IDLE),
      .gnt_valid_o(aw_gv[m]), .gnt_idx_o(aw_gi[m]));
    rr_arbiter #(.N(NP), .IW(PW)) i_ar_arb (
      .clk_i, .rst_ni, .req_i(ar_reqs[m]), .advance_i(r_st_q[m] == X_IDLE),
      .gnt_valid_o(ar_gv[m]), .gnt_idx_o(ar_gi[m]));
  end

  // ---------------- channel muxing ----------------
  always_comb begin
    for (int unsigned p = 0; p < NP; p++) begin
      m_req_o[p] = '0;
      s_rsp_o[p] = '0;
    end
    for (int unsigned m = 0; m < NP; m++) begin
      // address acceptance
      if (w_st_q[m] == X_IDLE && aw_gv[m]) s_rsp_o[aw_gi[m]].aw_ready = 1'b1;
      if (r_st_q[m] == X_IDLE && ar_gv[m]) s_rsp_o[ar_gi[m]].ar_ready = 1'b1;
      // issue downstream
      m_req_o[m].aw       = aw_q[m];
      m_req_o[m].aw_valid = (w_st_q[m] == X_ADDR);
      m_req_o[m].ar       = ar_q[m];
      m_req_o[m].ar_valid = (r_st_q[m] == X_ADDR);
      // write data and response
      if (w_st_q[m] == X_DATA) begin
        m_req_o[m].w       = s_req_i[w_own_q[m]].w;
        m_req_o[m].w_valid = s_req_i[w_own_q[m]].w_valid;
        s_rsp_o[w_own_q[m]].w_ready = m_rsp_i[m].w_ready;
      end
      if (w_st_q[m] == X_RESP) begin
        s_rsp_o[w_own_q[m]].b       = m_rsp_i[m].b;
        s_rsp_o[w_own_q[m]].b_valid = m_rsp_i[m].b_valid;
        m_req_o[m].b_ready = s_req_i[w_own_q[m]].b_ready;
      end
      // read data
      if (r_st_q[m] == X_DATA) begin
        s_rsp_o[r_own_q[m]].r       = m_rsp_i[m].r;
        s_rsp_o[r_own_q[m]].r_valid = m_rsp_i[m].r_valid;
        m_req_o[m].r_ready = s_req_i[r_own_q[m]].r_ready;
      end
    end
  end

  // ---------------- per-output state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_st_q <= '{default: X_IDLE}; r_st_q <= '{default: X_IDLE};
      w_own_q <= '0; r_own_q <= '0; aw_q <= '0; ar_q <= '0;
      w_cnt_q <= '0; r_cnt_q <= '0; in_w_busy_q <= '0; in_r_busy_q <= '0;
    end else begin
      for (int unsigned m = 0; m < NP; m++) begin
        // write path
        unique case (w_st_q[m])
          X_IDLE: if (aw_gv[m]) begin
            w_own_q[m] <= aw_gi[m];
            aw_q[m]    <= s_req_i[aw_gi[m]].aw;
            in_w_busy_q[aw_gi[m]] <= 1'b1;
            w_cnt_q[m] <= 8'(LATENCY);
            w_st_q[m]  <= (LATENCY > 1) ? X_DELAY : X_ADDR;
          end
          X_DELAY: begin
            w_cnt_q[m] <= w_cnt_q[m] - 8'd1;
            if (w_cnt_q[m] <= 8'd2) w_st_q[m] <= X_ADDR;
          end
          X_ADDR: if (m_rsp_i[m].aw_ready) w_st_q[m] <= X_DATA;
          X_DATA: if (m_req_o[m].w_valid && m_rsp_i[m].w_ready && m_req_o[m].w.last) w_st_q[m] <= X_RESP;
          X_RESP: if (m_rsp_i[m].b_valid && m_req_o[m].b_ready) begin
            w_st_q[m] <= X_IDLE;
            in_w_busy_q[w_own_q[m]] <= 1'b0;
          end
          default: w_st_q[m] <= X_IDLE;
        endcase
        // read path
        unique case (r_st_q[m])
          X_IDLE: if (ar_gv[m]) begin
            r_own_q[m] <= ar_gi[m];
            ar_q[m]    <= s_req_i[ar_gi[m]].ar;
            in_r_busy_q[ar_gi[m]] <= 1'b1;
            r_cnt_q[m] <= 8'(LATENCY);
            r_st_q[m]  <= (LATENCY > 1) ? X_DELAY : X_ADDR;
          end
          X_DELAY: begin
            r_cnt_q[m] <= r_cnt_q[m] - 8'd1;
            if (r_cnt_q[m] <= 8'd2) r_st_q[m] <= X_ADDR;
          end
          X_ADDR: if (m_rsp_i[m].ar_ready) r_st_q[m] <= X_DATA;
          X_DATA: if (m_rsp_i[m].r_valid && m_req_o[m].r_ready && m_rsp_i[m].r.last) begin
            r_st_q[m] <= X_IDLE;
            in_r_busy_q[r_own_q[m]] <= 1'b0;
          end
          default: r_st_q[m] <= X_IDLE;
        endcase
      end
    end
  end

  for (genvar m = 0; m < NP; m++) begin : g_chk
    a_aw_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      m_req_o[m].aw_valid && !m_rsp_i[m].aw_ready |=> m_req_o[m].aw_valid);
  end
endmodule
