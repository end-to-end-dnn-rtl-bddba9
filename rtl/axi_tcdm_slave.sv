// axi_tcdm_slave: the cluster's AXI4 slave port into its own L1.
//
// Other clusters (their DMA output channels) write into, or read from, this cluster's L1
// through it. It serves one burst at a time, writes first when both arrive together.
// Each 64-byte beat becomes 16 word accesses through 16 TCDM ports; write strobes become
// byte enables. A write burst ends with one B response after its last beat; a read beat is
// returned on R once all 16 words are back. The address is reduced to its low 20 bits (the
// offset inside the 1 MB L1). Only 64-byte INCR bursts on 64-byte aligned addresses are
// supported. That clusters have a slave port follows the described platform; the
// one-burst-at-a-time organisation is this design's choice.
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module axi_tcdm_slave
  import aimc_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axi_req_t   axi_req_i,
  output axi_rsp_t   axi_rsp_o,
  output tcdm_req_t [BEAT_WORDS-1:0] tcdm_req_o,
  input  tcdm_rsp_t [BEAT_WORDS-1:0] tcdm_rsp_i
);
  typedef enum logic [2:0] {S_IDLE, S_WDATA, S_WRESP, S_RREAD, S_RDATA} state_e;
  state_e st_q;
  logic [ADDR_W-1:0]          addr_q;
  logic [AXI_ID_W-1:0]        id_q;
  logic [7:0]                 left_q;
  logic [BEAT_WORDS-1:0][31:0] rbuf_q, rdata;
  logic                        done;
  logic                        bvalid;

  assign bvalid = (st_q == S_WDATA && axi_req_i.w_valid) || (st_q == S_RREAD);

  tcdm_beat_port i_port (
    .clk_i, .rst_ni,
    .beat_valid_i (bvalid),
    .beat_we_i    (st_q == S_WDATA),
    .beat_addr_i  ({{(ADDR_W-L1_AW){1'b0}}, addr_q[L1_AW-1:0]}),
    .beat_wmask_i ('1),
    .beat_wdata_i (axi_req_i.w.data),
    .beat_be_i    (axi_req_i.w.strb),
    .beat_done_o  (done),
    .beat_rdata_o (rdata),
    .tcdm_req_o, .tcdm_rsp_i
  );

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = (st_q == S_IDLE);
    axi_rsp_o.ar_ready = (st_q == S_IDLE) && !axi_req_i.aw_valid;
    axi_rsp_o.w_ready  = (st_q == S_WDATA) && done;
    axi_rsp_o.b_valid  = (st_q == S_WRESP);
    axi_rsp_o.b.id     = id_q;
    axi_rsp_o.b.resp   = RESP_OKAY;
    axi_rsp_o.r_valid  = (st_q == S_RDATA);
    axi_rsp_o.r.id     = id_q;
    axi_rsp_o.r.data   = rbuf_q;
    axi_rsp_o.r.resp   = RESP_OKAY;
    axi_rsp_o.r.last   = (left_q == 8'd0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; addr_q <= '0; id_q <= '0; left_q <= '0; rbuf_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: begin
          if (axi_req_i.aw_valid) begin
            st_q <= S_WDATA; addr_q <= axi_req_i.aw.addr; id_q <= axi_req_i.aw.id;
            left_q <= axi_req_i.aw.len;
          end else if (axi_req_i.ar_valid) begin
            st_q <= S_RREAD; addr_q <= axi_req_i.ar.addr; id_q <= axi_req_i.ar.id;
            left_q <= axi_req_i.ar.len;
          end
        end
        S_WDATA: if (done) begin
          addr_q <= addr_q + BEAT_BYTES;
          if (axi_req_i.w.last) st_q <= S_WRESP;
        end
        S_WRESP: if (axi_req_i.b_ready) st_q <= S_IDLE;
        S_RREAD: if (done) begin
          rbuf_q <= rdata;
          st_q   <= S_RDATA;
        end
        S_RDATA: if (axi_req_i.r_ready) begin
          addr_q <= addr_q + BEAT_BYTES;
          if (left_q == 8'd0) st_q <= S_IDLE;
          else begin
            left_q <= left_q - 8'd1;
            st_q   <= S_RREAD;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_b_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_rsp_o.b_valid && !axi_req_i.b_ready |=> axi_rsp_o.b_valid);
endmodule
