// cluster_dma: the cluster DMA with one input and one output channel.
//
// The input channel reads LEN bytes from a global address (another cluster's L1 or the
// HBM) with AXI4 INCR read bursts and writes them into this cluster's L1; the output channel
// reads LEN bytes from L1 and writes them to a global address with AXI4 write bursts. The
// input channel only uses the AXI read channels and the output channel only the write
// channels, so both run at the same time on one AXI master port. Each channel owns 16 TCDM
// word ports (one 64-byte beat at a time) and pulses its done event to the event unit when
// the transfer ends. Bursts are at most MAX_BEATS beats, never cross a 4 KB boundary and
// are issued one at a time per channel. Addresses and LEN must be multiples of 64 bytes.
// The two channels and their events follow the described execution flow ("input and output
// DMA channels"); burst policy, register map and port count are this design's choices.
// Lint notes: the input channel's beat port never returns read data, so its beat_rdata_o
// is left open. A simulator that flattens the TCDM request/response arrays into single
// vectors sees a loop through in_done (grant -> done -> R ready); the grant only depends on
// the request valid of the same port, and R ready does not feed back into R valid, so the
// path is acyclic bit by bit.
// Lint note: rst_ni also appears in the 'disable iff' of this file's assertions, which a linter
// reports as a synchronous use of the reset; every flop resets asynchronously.
module cluster_dma
  import aimc_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 16,
  parameter logic [AXI_ID_W-1:0] AXI_ID = '0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  cfg_req_t    cfg_req_i,
  output logic [31:0] cfg_rdata_o,
  output logic        evt_in_done_o,
  output logic        evt_out_done_o,
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i,
  output tcdm_req_t [2*BEAT_WORDS-1:0] tcdm_req_o,   // [15:0] input channel, [31:16] output
  input  tcdm_rsp_t [2*BEAT_WORDS-1:0] tcdm_rsp_i
);
  typedef enum logic [1:0] {CH_IDLE, CH_ADDR, CH_DATA, CH_RESP} ch_state_e;

  // ---------------- registers ----------------
  logic [31:0] in_ext_q, in_l1_q, in_len_q, out_ext_q, out_l1_q, out_len_q;
  wire wr = cfg_req_i.valid && cfg_req_i.we;
  ch_state_e in_st_q, out_st_q;

  // beats of the next burst: up to MAX_BEATS, the rest of the transfer, the 4 KB page
  function automatic logic [8:0] burst_beats(logic [31:0] ext, logic [31:0] len);
    logic [31:0] page_left, left, n;
    page_left = (32'h1000 - {20'h0, ext[11:0]}) >> 6;
    left      = len >> 6;
    n         = 32'(MAX_BEATS);
    if (left < n)      n = left;
    if (page_left < n) n = page_left;
    return n[8:0];
  endfunction

  // ---------------- input channel: AXI read -> L1 ----------------
  logic [8:0]  in_beats_q;
  logic        in_done;
  logic        in_bvalid;

  tcdm_beat_port i_in_port (
    .clk_i, .rst_ni,
    .beat_valid_i (in_bvalid),
    .beat_we_i    (1'b1),
    .beat_addr_i  (in_l1_q),
    .beat_wmask_i ('1),
    .beat_wdata_i (axi_rsp_i.r.data),
    .beat_be_i    ('1),
    .beat_done_o  (in_done),
    .beat_rdata_o (),
    .tcdm_req_o   (tcdm_req_o[BEAT_WORDS-1:0]),
    .tcdm_rsp_i   (tcdm_rsp_i[BEAT_WORDS-1:0])
  );
  assign in_bvalid = (in_st_q == CH_DATA) && axi_rsp_i.r_valid;

  // ---------------- output channel: L1 -> AXI write ----------------
  logic [8:0]                 out_beats_q, out_cnt_q;
  logic                       out_done, out_have_q;
  logic [BEAT_WORDS-1:0][31:0] out_rdata, out_buf_q;

  tcdm_beat_port i_out_port (
    .clk_i, .rst_ni,
    .beat_valid_i (out_st_q == CH_DATA && !out_have_q),
    .beat_we_i    (1'b0),
    .beat_addr_i  (out_l1_q),
    .beat_wmask_i ('1),
    .beat_wdata_i ('0),
    .beat_be_i    ('0),
    .beat_done_o  (out_done),
    .beat_rdata_o (out_rdata),
    .tcdm_req_o   (tcdm_req_o[2*BEAT_WORDS-1:BEAT_WORDS]),
    .tcdm_rsp_i   (tcdm_rsp_i[2*BEAT_WORDS-1:BEAT_WORDS])
  );

  always_comb begin
    axi_req_o = '0;
    // read address
    axi_req_o.ar_valid  = (in_st_q == CH_ADDR);
    axi_req_o.ar.id     = AXI_ID;
    axi_req_o.ar.addr   = in_ext_q;
    axi_req_o.ar.len    = 8'(in_beats_q - 9'd1);
    axi_req_o.ar.size   = 3'd6;
    axi_req_o.ar.burst  = BURST_INCR;
    axi_req_o.r_ready   = in_done;
    // write address / data / response
    axi_req_o.aw_valid  = (out_st_q == CH_ADDR);
    axi_req_o.aw.id     = AXI_ID;
    axi_req_o.aw.addr   = out_ext_q;
    axi_req_o.aw.len    = 8'(out_beats_q - 9'd1);
    axi_req_o.aw.size   = 3'd6;
    axi_req_o.aw.burst  = BURST_INCR;
    axi_req_o.w_valid   = (out_st_q == CH_DATA) && out_have_q;
    axi_req_o.w.data    = out_buf_q;
    axi_req_o.w.strb    = '1;
    axi_req_o.w.last    = (out_cnt_q == out_beats_q - 9'd1);
    axi_req_o.b_ready   = (out_st_q == CH_RESP);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      in_ext_q <= '0; in_l1_q <= '0; in_len_q <= '0;
      out_ext_q <= '0; out_l1_q <= '0; out_len_q <= '0;
      in_st_q <= CH_IDLE; out_st_q <= CH_IDLE;
      in_beats_q <= '0; out_beats_q <= '0; out_cnt_q <= '0;
      out_have_q <= 1'b0; out_buf_q <= '0;
      evt_in_done_o <= 1'b0; evt_out_done_o <= 1'b0;
    end else begin
      evt_in_done_o  <= 1'b0;
      evt_out_done_o <= 1'b0;
      // ---- input channel ----
      unique case (in_st_q)
        CH_IDLE: begin
          if (wr && cfg_req_i.addr[7:0] == DMA_IN_EXT) in_ext_q <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_IN_L1)  in_l1_q  <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_IN_LEN) in_len_q <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_IN_START) begin
            if (in_len_q == 0) evt_in_done_o <= 1'b1;
            else begin
              in_st_q    <= CH_ADDR;
              in_beats_q <= burst_beats(in_ext_q, in_len_q);
            end
          end
        end
        CH_ADDR: if (axi_rsp_i.ar_ready) in_st_q <= CH_DATA;
        CH_DATA: if (in_done) begin
          in_l1_q  <= in_l1_q  + BEAT_BYTES;
          in_ext_q <= in_ext_q + BEAT_BYTES;
          in_len_q <= in_len_q - BEAT_BYTES;
          if (axi_rsp_i.r.last) begin
            if (in_len_q == BEAT_BYTES) begin
              in_st_q       <= CH_IDLE;
              evt_in_done_o <= 1'b1;
            end else begin
              in_st_q    <= CH_ADDR;
              in_beats_q <= burst_beats(in_ext_q + BEAT_BYTES, in_len_q - BEAT_BYTES);
            end
          end
        end
        default: in_st_q <= CH_IDLE;
      endcase
      // ---- output channel ----
      unique case (out_st_q)
        CH_IDLE: begin
          if (wr && cfg_req_i.addr[7:0] == DMA_OUT_EXT) out_ext_q <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_OUT_L1)  out_l1_q  <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_OUT_LEN) out_len_q <= cfg_req_i.wdata;
          if (wr && cfg_req_i.addr[7:0] == DMA_OUT_START) begin
            if (out_len_q == 0) evt_out_done_o <= 1'b1;
            else begin
              out_st_q    <= CH_ADDR;
              out_beats_q <= burst_beats(out_ext_q, out_len_q);
              out_cnt_q   <= '0;
            end
          end
        end
        CH_ADDR: if (axi_rsp_i.aw_ready) out_st_q <= CH_DATA;
        CH_DATA: begin
          if (!out_have_q && out_done) begin
            out_buf_q  <= out_rdata;
            out_have_q <= 1'b1;
            out_l1_q   <= out_l1_q + BEAT_BYTES;
          end
          if (out_have_q && axi_rsp_i.w_ready) begin
            out_have_q <= 1'b0;
            out_cnt_q  <= out_cnt_q + 9'd1;
            out_ext_q  <= out_ext_q + BEAT_BYTES;
            out_len_q  <= out_len_q - BEAT_BYTES;
            if (out_cnt_q == out_beats_q - 9'd1) out_st_q <= CH_RESP;
          end
        end
        CH_RESP: if (axi_rsp_i.b_valid) begin
          if (out_len_q == 0) begin
            out_st_q       <= CH_IDLE;
            evt_out_done_o <= 1'b1;
          end else begin
            out_st_q    <= CH_ADDR;
            out_beats_q <= burst_beats(out_ext_q, out_len_q);
            out_cnt_q   <= '0;
          end
        end
        default: out_st_q <= CH_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (cfg_req_i.addr[7:0])
      DMA_IN_EXT:  cfg_rdata_o = in_ext_q;
      DMA_IN_L1:   cfg_rdata_o = in_l1_q;
      DMA_IN_LEN:  cfg_rdata_o = in_len_q;
      DMA_OUT_EXT: cfg_rdata_o = out_ext_q;
      DMA_OUT_L1:  cfg_rdata_o = out_l1_q;
      DMA_OUT_LEN: cfg_rdata_o = out_len_q;
      DMA_STATUS:  cfg_rdata_o = {30'h0, out_st_q != CH_IDLE, in_st_q != CH_IDLE};
      default:     cfg_rdata_o = '0;
    endcase
  end

  // AXI: a raised valid stays until its handshake
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_o.ar_valid && !axi_rsp_i.ar_ready |=> axi_req_o.ar_valid);
  a_w_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_o.w_valid && !axi_rsp_i.w_ready |=> axi_req_o.w_valid && $stable(axi_req_o.w.data));
endmodule
