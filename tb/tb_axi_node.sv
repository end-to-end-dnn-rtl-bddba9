// tb_axi_node: a node with 3 children (clusters 4..9, two per child) and the up link. Each
// of its four inputs runs random write bursts followed by read-backs to clusters of every
// child and to addresses outside the subtree, all at once, so outputs are contended.
// Memories on the four outputs record where each burst went. Checks the routing of every
// burst, read-back data, RLAST/B handshakes, the 4-cycle node latency on an idle node, and
// that contention happened.
module tb_axi_node;
  import aimc_pkg::*;
  localparam int NC = 3, NP = NC + 1, LAT = 4, NTR = 12;
  logic clk = 0, rst_n = 1;
  axi_req_t [NC:0] s_req, m_req;
  axi_rsp_t [NC:0] s_rsp, m_rsp;
  int checks = 0, failures = 0, waits = 0;

  axi_node #(.N_CHILD(NC), .CL_FIRST(4), .CL_PER_CHILD(2), .LATENCY(LAT)) dut (
    .clk_i(clk), .rst_ni(rst_n), .s_req_i(s_req), .s_rsp_o(s_rsp), .m_req_o(m_req), .m_rsp_i(m_rsp));
  for (genvar p = 0; p < NP; p++) begin : g_mem
    axi_mem_model #(.LATENCY(3), .READY_PCT(70)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req[p]), .rsp_o(m_rsp[p]));
  end
  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expected_port(logic [31:0] a);
    int c;
    if (!a[31]) return NC;
    c = a[30:20];
    if (c >= 4 && c < 10) return (c - 4) / 2;
    return NC;
  endfunction

  function automatic logic [31:0] rand_addr(int s, int n);
    int c;
    c = 2 + $urandom % 10;   // clusters 2..11: some in, some out of the subtree
    if ($urandom % 5 == 0) return 32'h0100_0000 + 32'(s * 32'h1000 + n * 32'h100);  // HBM
    return 32'h8000_0000 + 32'(c) * 32'h10_0000 + 32'(s * 32'h1000 + n * 32'h100);
  endfunction

  task automatic master(int s);
    for (int n = 0; n < NTR; n++) begin
      logic [31:0] a; int beats; int p;
      logic [AXI_DATA_W-1:0] data [4];
      a = rand_addr(s, n); beats = 1 + $urandom % 4; p = expected_port(a);
      // write
      s_req[s].aw = '{id: 4'(s), addr: a, len: 8'(beats-1), size: 3'd6, burst: BURST_INCR};
      s_req[s].aw_valid = 1;
      do @(posedge clk); while (!s_rsp[s].aw_ready);
      #1 s_req[s].aw_valid = 0;
      for (int b = 0; b < beats; b++) begin
        for (int k = 0; k < 16; k++) data[b][32*k +: 32] = $urandom;
        s_req[s].w = '{data: data[b], strb: '1, last: b == beats-1};
        s_req[s].w_valid = 1;
        do begin @(posedge clk); if (!s_rsp[s].w_ready) waits++; end while (!s_rsp[s].w_ready);
        #1 s_req[s].w_valid = 0;
      end
      s_req[s].b_ready = 1;
      do @(posedge clk); while (!s_rsp[s].b_valid);
      check("B id", s_rsp[s].b.id == 4'(s));
      #1 s_req[s].b_ready = 0;
      // the burst landed on the right output
      for (int b = 0; b < beats; b++) begin
        logic [25:0] line; logic ok;
        line = 26'((a + 64*b) >> 6);
        case (p)
          0: ok = g_mem[0].i_mem.mem.exists(line) && g_mem[0].i_mem.mem[line] == data[b];
          1: ok = g_mem[1].i_mem.mem.exists(line) && g_mem[1].i_mem.mem[line] == data[b];
          2: ok = g_mem[2].i_mem.mem.exists(line) && g_mem[2].i_mem.mem[line] == data[b];
          default: ok = g_mem[3].i_mem.mem.exists(line) && g_mem[3].i_mem.mem[line] == data[b];
        endcase
        check($sformatf("input %0d burst to %h routed to port %0d", s, a, p), ok);
      end
      // read back
      s_req[s].ar = '{id: 4'(s), addr: a, len: 8'(beats-1), size: 3'd6, burst: BURST_INCR};
      s_req[s].ar_valid = 1;
      do @(posedge clk); while (!s_rsp[s].ar_ready);
      #1 s_req[s].ar_valid = 0;
      s_req[s].r_ready = 1;
      for (int b = 0; b < beats; b++) begin
        do @(posedge clk); while (!s_rsp[s].r_valid);
        check("read-back data", s_rsp[s].r.data == data[b]);
        check("RLAST", s_rsp[s].r.last == (b == beats-1));
      end
      #1 s_req[s].r_ready = 0;
    end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0;
    s_req = '0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // latency on an idle node: address accepted at t0, issued LAT cycles later
    s_req[0].ar = '{id: 4'd1, addr: 32'h8050_0000, len: 0, size: 3'd6, burst: BURST_INCR};
    s_req[0].ar_valid = 1; #1;
    check("idle node accepts at once", s_rsp[0].ar_ready);
    @(negedge clk); s_req[0].ar_valid = 0; t0 = 0;
    while (!m_req[0].ar_valid) begin @(negedge clk); t0++; end
    check($sformatf("node latency %0d cycles", t0 + 1), t0 + 1 == LAT);
    s_req[0].r_ready = 1;
    while (!(s_rsp[0].r_valid)) @(negedge clk);
    @(negedge clk); s_req[0].r_ready = 0;
    fork
      master(0); master(1); master(2); master(3);
    join
    check("outputs were contended", waits > 0);
    $display("W stall cycles=%0d", waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
