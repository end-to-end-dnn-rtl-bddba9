// axi_mem_model: behavioural AXI4 slave memory (stands in for the HBM and its controller in
// testbenches). One write burst and one read burst at a time; the first read beat comes
// LATENCY cycles after the read address, the write response LATENCY cycles after the last
// write beat (100 cycles is the HBM latency of the described platform). Ready signals are
// randomly withheld (READY_PCT) to exercise back-pressure. Storage is sparse, one 64-byte
// line per entry; unwritten lines read as zero.
module axi_mem_model
  import aimc_pkg::*;
#(
  parameter int unsigned LATENCY   = 100,
  parameter int unsigned READY_PCT = 80
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  logic [AXI_DATA_W-1:0] mem [logic [25:0]];
  int unsigned n_writes = 0, n_reads = 0;

  // write side
  typedef enum {W_IDLE, W_DATA, W_WAIT, W_RESP} wst_e;
  wst_e wst; logic [31:0] waddr; logic [AXI_ID_W-1:0] wid; int wcnt;
  // read side
  typedef enum {R_IDLE, R_WAIT, R_DATA} rst_e;
  rst_e rst; logic [31:0] raddr; logic [AXI_ID_W-1:0] rid; int rcnt; logic [7:0] rleft;
  logic rdy_w, rdy_a;

  function automatic logic [AXI_DATA_W-1:0] rd(logic [31:0] a);
    if (mem.exists(a[31:6])) return mem[a[31:6]];
    return '0;
  endfunction

  always_comb begin
    rsp_o = '0;
    rsp_o.aw_ready = (wst == W_IDLE) && rdy_a;
    rsp_o.w_ready  = (wst == W_DATA) && rdy_w;
    rsp_o.b_valid  = (wst == W_RESP);
    rsp_o.b.id     = wid;
    rsp_o.ar_ready = (rst == R_IDLE) && rdy_a;
    rsp_o.r_valid  = (rst == R_DATA);
    rsp_o.r.id     = rid;
    rsp_o.r.data   = rd(raddr);
    rsp_o.r.last   = (rleft == 0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wst <= W_IDLE; rst <= R_IDLE; rdy_w <= 1'b0; rdy_a <= 1'b0;
      waddr <= '0; raddr <= '0; wid <= '0; rid <= '0; wcnt <= 0; rcnt <= 0; rleft <= '0;
    end else begin
      rdy_w <= (($urandom % 100) < READY_PCT);
      rdy_a <= (($urandom % 100) < READY_PCT);
      case (wst)
        W_IDLE: if (req_i.aw_valid && rsp_o.aw_ready) begin
          wst <= W_DATA; waddr <= req_i.aw.addr; wid <= req_i.aw.id;
        end
        W_DATA: if (req_i.w_valid && rsp_o.w_ready) begin
          logic [AXI_DATA_W-1:0] line;
          line = rd(waddr);
          for (int b = 0; b < AXI_STRB_W; b++) if (req_i.w.strb[b]) line[8*b +: 8] = req_i.w.data[8*b +: 8];
          mem[waddr[31:6]] = line;
          n_writes++;
          waddr <= waddr + 64;
          if (req_i.w.last) begin wst <= W_WAIT; wcnt <= LATENCY; end
        end
        W_WAIT: if (wcnt <= 1) wst <= W_RESP; else wcnt <= wcnt - 1;
        W_RESP: if (req_i.b_ready) wst <= W_IDLE;
        default: wst <= W_IDLE;
      endcase
      case (rst)
        R_IDLE: if (req_i.ar_valid && rsp_o.ar_ready) begin
          rst <= R_WAIT; raddr <= req_i.ar.addr; rid <= req_i.ar.id; rleft <= req_i.ar.len;
          rcnt <= LATENCY;
        end
        R_WAIT: if (rcnt <= 1) rst <= R_DATA; else rcnt <= rcnt - 1;
        R_DATA: if (req_i.r_ready) begin
          n_reads++;
          raddr <= raddr + 64;
          if (rleft == 0) rst <= R_IDLE; else rleft <= rleft - 1;
        end
        default: rst <= R_IDLE;
      endcase
    end
  end
endmodule
