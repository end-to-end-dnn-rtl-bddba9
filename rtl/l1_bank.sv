// l1_bank: one bank of the cluster's shared L1 scratchpad (TCDM).
//
// A single-port word memory with byte enables. A request is always accepted; read data
// appears on rdata one cycle later and holds until the next access. The L1 of a cluster is
// 1 MB split into word-interleaved banks (the bank count is this design's choice, the 1 MB
// is the described platform's). The array has no reset; the software writes before it reads.
module l1_bank #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
