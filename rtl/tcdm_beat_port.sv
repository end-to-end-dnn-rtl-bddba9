// tcdm_beat_port: moves one beat of up to 16 consecutive 32-bit words between a wide
// (64-byte) client and 16 TCDM word ports.
//
// The client holds beat_valid_i with a stable address, write data and word mask until
// beat_done_o. Word k goes to byte address addr + 4k on port k. Ports whose bank is busy
// retry the following cycle, so a beat finishes when every selected word has been granted
// (writes: in the cycle of the last grant; reads: in the cycle the last read data returns,
// with beat_rdata_o valid in that cycle). Helper shared by the DMA, the cluster AXI slave
// port and the IMA streamer; its organisation is this design's choice.
module tcdm_beat_port
  import aimc_pkg::*;
#(
  parameter int unsigned NW = BEAT_WORDS
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  beat_valid_i,
  input  logic                  beat_we_i,
  input  logic [ADDR_W-1:0]     beat_addr_i,
  input  logic [NW-1:0]         beat_wmask_i,   // words taking part
  input  logic [NW-1:0][31:0]   beat_wdata_i,
  input  logic [NW-1:0][3:0]    beat_be_i,
  output logic                  beat_done_o,
  output logic [NW-1:0][31:0]   beat_rdata_o,
  output tcdm_req_t [NW-1:0]    tcdm_req_o,
  input  tcdm_rsp_t [NW-1:0]    tcdm_rsp_i
);
  logic [NW-1:0]       granted_q;   // request already granted
  logic [NW-1:0]       got_q;       // read data already captured
  logic [NW-1:0][31:0] rdata_q;
  logic [NW-1:0]       gnt_now, rv_now;

  always_comb begin
    for (int unsigned k = 0; k < NW; k++) begin
      tcdm_req_o[k].req   = beat_valid_i && beat_wmask_i[k] && !granted_q[k];
      tcdm_req_o[k].we    = beat_we_i;
      tcdm_req_o[k].be    = beat_we_i ? beat_be_i[k] : 4'hF;
      tcdm_req_o[k].addr  = beat_addr_i + ADDR_W'(4*k);
      tcdm_req_o[k].wdata = beat_wdata_i[k];
      gnt_now[k] = tcdm_req_o[k].req && tcdm_rsp_i[k].gnt;
      rv_now[k]  = tcdm_rsp_i[k].rvalid && granted_q[k] && !got_q[k];
      beat_rdata_o[k] = rv_now[k] ? tcdm_rsp_i[k].rdata : rdata_q[k];
    end
    if (beat_we_i) beat_done_o = beat_valid_i && &(granted_q | gnt_now | ~beat_wmask_i);
    else           beat_done_o = beat_valid_i && &(got_q | rv_now | ~beat_wmask_i);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      granted_q <= '0;
      got_q     <= '0;
      rdata_q   <= '0;
    end else if (beat_done_o) begin
      granted_q <= '0;
      got_q     <= '0;
    end else begin
      granted_q <= granted_q | gnt_now;
      got_q     <= got_q | rv_now;
      for (int unsigned k = 0; k < NW; k++)
        if (rv_now[k]) rdata_q[k] <= tcdm_rsp_i[k].rdata;
    end
  end
endmodule
