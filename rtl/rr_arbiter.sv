// rr_arbiter: round-robin arbiter. Grants one of the requesting inputs each cycle,
// starting the search one position after the input granted last (only when that grant
// was used, advance_i). Combinational grant, registered priority pointer. Helper of the
// TCDM crossbar and the AXI router node.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  input  logic          advance_i,
  output logic          gnt_valid_o,
  output logic [IW-1:0] gnt_idx_o
);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_valid_o = 1'b0;
    gnt_idx_o   = '0;
    for (int unsigned i = 0; i < N; i++) begin
      int unsigned k;
      k = (int'(ptr_q) + i) % N;
      if (!gnt_valid_o && req_i[k]) begin
        gnt_valid_o = 1'b1;
        gnt_idx_o   = IW'(k);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       ptr_q <= '0;
    else if (advance_i && gnt_valid_o) ptr_q <= (int'(gnt_idx_o) == N-1) ? '0 : gnt_idx_o + 1'b1;
  end
endmodule
