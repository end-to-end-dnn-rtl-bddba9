// tcdm_mem_model: behavioural L1 memory with NP word ports for unit testbenches.
// Each request is granted with probability GNT_PCT percent (modelling bank conflicts);
// granted reads return data one cycle later with rvalid, as the real L1 crossbar does.
// mem is a word array indexed by (byte address / 4) modulo WORDS; testbenches preload and
// check it hierarchically.
module tcdm_mem_model
  import aimc_pkg::*;
#(
  parameter int unsigned NP      = 16,
  parameter int unsigned WORDS   = 4096,
  parameter int unsigned GNT_PCT = 70
) (
  input  logic                 clk_i,
  input  tcdm_req_t [NP-1:0]   req_i,
  output tcdm_rsp_t [NP-1:0]   rsp_o
);
  logic [31:0] mem [WORDS];
  logic [NP-1:0] gnt;
  int unsigned stalls = 0;

  always_comb
    for (int k = 0; k < NP; k++) begin
      rsp_o[k].gnt = gnt[k] && req_i[k].req;
    end

  always_ff @(posedge clk_i) begin
    for (int k = 0; k < NP; k++) begin
      int unsigned idx;
      idx = (req_i[k].addr >> 2) % WORDS;
      rsp_o[k].rvalid <= rsp_o[k].gnt;
      if (rsp_o[k].gnt) begin
        if (req_i[k].we) begin
          for (int b = 0; b < 4; b++) if (req_i[k].be[b]) mem[idx][8*b +: 8] <= req_i[k].wdata[8*b +: 8];
        end else rsp_o[k].rdata <= mem[idx];
      end
      if (req_i[k].req && !gnt[k]) stalls++;
      gnt[k] <= (($urandom % 100) < GNT_PCT);
    end
  end
  initial begin
    gnt = '0;
    for (int k = 0; k < NP; k++) begin rsp_o[k].rvalid = 1'b0; rsp_o[k].rdata = '0; end
  end
endmodule
